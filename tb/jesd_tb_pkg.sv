// jesd_tb_pkg: stimulus definitions shared by the receiver testbenches.
//
// tx_data_word gives the user-data word number n of lane `lane` of link
// `link` as sent by the transmitter model; the testbenches compute the
// expected receiver output from the same function. It is a multiplicative
// hash so that neighbouring words, lanes and links all differ.
//
// afe_sample and afe_lane_word model a 16-channel, 16-bit ADC on two lanes
// (M = 16, N' = 16, S = 1, L = 2, F = 16), as in the reference hardware
// test. afe_sample gives sample number `frame` of converter `conv`: mode 1 is
// a ramp (channel number in the top nibble, frame count below), mode 2 a
// sine at 1/16 of the sample rate (5 MHz at 80 MS/s), amplitude 9830 LSB,
// phase stepped by pi/8 per channel. afe_lane_word applies the JESD204B
// transport mapping: a frame holds the samples of converters 0..15, MSB
// octet first, split so that lane 0 carries converters 0..7 and lane 1
// converters 8..15; octet o of a lane frame sits in word o/4, octet o%4.
package jesd_tb_pkg;
  localparam real AFE_PI  = 3.14159265358979;
  localparam real AFE_AMP = 9830.0;
  function automatic logic [31:0] tx_data_word(input int unsigned link,
                                               input int unsigned lane,
                                               input int unsigned n);
    logic [31:0] x;
    x = 32'(n) * 32'h9E37_79B1;
    x = x ^ (32'(lane) << 28) ^ (32'(link) << 24) ^ 32'h0000_5A5A;
    return x ^ (x >> 13);
  endfunction

  function automatic logic [15:0] afe_sample(input int unsigned mode,
                                             input int unsigned conv,
                                             input int unsigned frame);
    real x;
    if (mode == 1) return 16'(conv * 4096 + frame);
    x = AFE_AMP * $sin(2.0 * AFE_PI * real'(frame % 16) / 16.0
                       + AFE_PI * real'(conv) / 8.0);
    return 16'($rtoi(x < 0.0 ? x - 0.5 : x + 0.5));
  endfunction

  function automatic logic [31:0] afe_lane_word(input int unsigned mode,
                                                input int unsigned lane,
                                                input int unsigned n,
                                                input int unsigned f_octets);
    logic [31:0] d;
    int unsigned wpf, frame, o, conv;
    logic [15:0] smp;
    wpf   = f_octets / 4;
    frame = n / wpf;
    for (int j = 0; j < 4; j++) begin
      o    = 4 * (n % wpf) + 32'(j);
      conv = lane * (f_octets / 2) + o / 2;
      smp  = afe_sample(mode, conv, frame);
      d[8*j +: 8] = (o % 2 == 0) ? smp[15:8] : smp[7:0];
    end
    return d;
  endfunction
endpackage
