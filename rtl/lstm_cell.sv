// lstm_cell: element-wise state update of one LSTM hidden unit.
//
// Given the four activated gates of unit j (input i, forget f and output o
// after sigmoid, candidate g after tanh, all Q0.7) and the unit's old cell
// state c (signed 16-bit Q8.7), it computes
//   c' = sat16((f * c) >>> 7 + (i * g) >>> 7)
//   h  = sat8((o * tanh(c')) >>> 7)
// with tanh taken from the same lookup table as the SACC output functions,
// addressed by sat8(c' >>> 3) (Q8.7 -> Q3.4).
//
// The three element-wise products are the only multipliers of the LSTM
// accelerator (the source reports a handful of DSP blocks for it and none for
// the SACC datapath). The number formats and rounding (truncation by
// arithmetic shift) are this design's choice.
//
// Timing: fully pipelined, one unit per cycle, result three cycles after
// in_valid. `idx` travels with the data.
module lstm_cell
  import hyd_pkg::*;
#(
  parameter int IDX_W = 9
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [IDX_W-1:0]   in_idx,
  input  act_t               gi, gf, gg, go,
  input  logic signed [15:0] c_old,
  output logic               out_valid,
  output logic [IDX_W-1:0]   out_idx,
  output logic signed [15:0] c_new,
  output act_t               h
);
  logic signed [31:0] c_sum;
  logic signed [15:0] c1, c2;
  act_t               o1, o2, tanh_c;
  logic               v1, v2;
  logic [IDX_W-1:0]   idx1, idx2;
  logic signed [31:0] h_prod;

  always_comb begin
    c_sum = ((32'(gf) * 32'(c_old)) >>> 7) + ((32'(gi) * 32'(gg)) >>> 7);
    h_prod = (32'(o2) * 32'(tanh_c)) >>> 7;
  end

  function automatic logic signed [15:0] sat16(logic signed [31:0] v);
    if (v > 32'sd32767)  return 16'sh7fff;
    if (v < -32'sd32768) return 16'sh8000;
    return v[15:0];
  endfunction

  act_lut u_tanh (.clk(clk), .x(sat8(32'(c1 >>> 3))), .sel_tanh(1'b1), .y(tanh_c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
      c1 <= '0; c2 <= '0; c_new <= '0;
      o1 <= '0; o2 <= '0; h <= '0;
      idx1 <= '0; idx2 <= '0; out_idx <= '0;
    end else begin
      v1 <= in_valid;   idx1 <= in_idx;  c1 <= sat16(c_sum); o1 <= go;
      v2 <= v1;         idx2 <= idx1;    c2 <= c1;           o2 <= o1;
      out_valid <= v2;  out_idx <= idx2; c_new <= c2;        h <= sat8(h_prod);
    end
  end
endmodule
