// act_lut: sigmoid and tanh by table lookup.
//
// The LSTM gates need sigmoid and tanh; the source implements both as lookup
// table approximations. The address is a signed 8-bit value read as Q3.4
// (x = value/16, so -8.0 .. +7.94); the result is signed 8-bit Q0.7
// (y = value/128, saturated to 127). Each table has 256 entries:
//   sigmoid[a] = min(127, floor(128 / (1 + exp(-x)) + 0.5))
//   tanh[a]    = clamp(floor(128 * tanh(x) + 0.5), -128, 127)
// stored in rtl/act_sigmoid.hex and rtl/act_tanh.hex (entry a holds the
// value for address a, with x the two's complement value of a over 16).
//
// Timing: one cycle. The address is registered, like a block RAM read.
// The Q formats and table depth are this design's choice.
module act_lut
  import hyd_pkg::*;
(
  input  logic clk,
  input  act_t x,
  input  logic sel_tanh,   // 0: sigmoid, 1: tanh
  output act_t y
);
  logic [7:0] sig_tab [256];
  logic [7:0] tanh_tab [256];

  initial begin
    $readmemh("rtl/act_sigmoid.hex", sig_tab);
    $readmemh("rtl/act_tanh.hex", tanh_tab);
  end

  always_ff @(posedge clk)
    y <= act_t'(sel_tanh ? tanh_tab[8'(x)] : sig_tab[8'(x)]);
endmodule
