// sacc_outfn: output functions applied to a finished SACC accumulator.
//
// The source lists batch normalisation, scaling of the data, ReLU and the
// non-linear operators (sigmoid, tanh) needed by the LSTM. This module
// computes, for one output channel,
//   t = (acc >>> cp.shift) + cp.bias      folded batch norm / scaling
//   y = act(sat8(t))                       act = none, ReLU, sigmoid or tanh
// where the batch-norm scale is a power of two (a shift, keeping the engine
// free of multipliers) and sat8 clamps to the signed 8-bit range.
// Sigmoid and tanh read sat8(t) as Q3.4 and return Q0.7 (see act_lut).
//
// Timing: one cycle from in_valid to out_valid, for every function.
// The shift-plus-bias form of batch normalisation is this design's choice.
module sacc_outfn
  import hyd_pkg::*;
#(
  parameter int ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] acc,
  input  chan_param_t             cp,
  input  act_fn_e                 act,
  output logic                    out_valid,
  output act_t                    y
);
  logic signed [ACC_W-1:0] scaled;
  act_t    t8, lin_q, lut_y;
  act_fn_e act_q;

  always_comb begin
    scaled = (acc >>> cp.shift) + ACC_W'(cp.bias);
    t8     = sat8(32'(scaled));
  end

  act_lut u_lut (.clk(clk), .x(t8), .sel_tanh(act == ACT_TANH), .y(lut_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      lin_q     <= '0;
      act_q     <= ACT_NONE;
    end else begin
      out_valid <= in_valid;
      act_q     <= act;
      lin_q     <= (act == ACT_RELU && t8 < 0) ? act_t'(0) : t8;
    end
  end

  assign y = (act_q == ACT_SIGMOID || act_q == ACT_TANH) ? lut_y : lin_q;
endmodule
