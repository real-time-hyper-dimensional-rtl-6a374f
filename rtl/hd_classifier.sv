// hd_classifier: the HD classifier accelerator (inference and reconfiguration).
//
// Features of one time step (K signed bytes, the LSTM hidden state) come in
// on the feature stream. hd_encoder maps them to a D-bit frame hypervector,
// delivered in W-bit chunks. Each chunk goes to both
//   * hd_search, which scores it against the class exemplars and, after the
//     last chunk, reports the class with the smallest Hamming distance
//     summed over the last F frames, and
//   * hd_reconfig, which, while training is on, bundles the frame into the
//     counters of a new exemplar and writes that exemplar into the search
//     memory when training stops.
// So inference keeps running while a new class is being learned. When a
// commit lands on a class index at or above `num_classes`, the class count
// grows to include it, and the sliding window restarts so that the new
// class is scored on equal terms.
//
// The host loads the model through the item-memory and exemplar ports and
// sets the active class count with nc_we/nc_data (host exemplar writes are
// ignored while a commit is being written). Setting the class count also
// restarts the window, since the new classes have no distance history.
//
// Timing: about NCH * (K + 2) cycles per frame for encoding, which hides the
// search (num_classes + 1 cycles per chunk) as long as num_classes < K.
//
// From the source: the split into HD mapping, exemplar search with Hamming
// distance over a sliding window, and the HD reconfiguration encoder, and the
// sizes D = 4096, K = 512, F = 12, 101 classes. The stream interfaces, the
// class-count register and the automatic window restart are this design's
// choice.
module hd_classifier
  import hyd_pkg::*;
#(
  parameter int D      = 4096,
  parameter int W      = 256,
  parameter int K      = 512,
  parameter int LEVELS = 256,
  parameter int C_MAX  = 101,
  parameter int F      = 12,
  parameter int TW     = 16,
  localparam int NCH  = D / W,
  localparam int CA   = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int CLW  = $clog2(C_MAX + 1),
  localparam int PAW  = $clog2(K * NCH),
  localparam int LAW  = $clog2(LEVELS * NCH),
  localparam int DW   = $clog2(D + 1),
  localparam int FA   = (F > 1) ? $clog2(F) : 1,
  localparam int SUMW = DW + $clog2(F + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // model load
  input  logic            pos_we,
  input  logic [PAW-1:0]  pos_waddr,
  input  logic            lvl_we,
  input  logic [LAW-1:0]  lvl_waddr,
  input  logic [W-1:0]    item_wdata,
  input  logic            ex_we,
  input  logic [CLW-1:0]  ex_class,
  input  logic [CA-1:0]   ex_chunk,
  input  logic [W-1:0]    ex_data,
  input  logic            nc_we,
  input  logic [CLW-1:0]  nc_data,
  output logic [CLW-1:0]  num_classes,
  // control
  input  logic            win_clear,
  input  logic            train_start,
  input  logic [CLW-1:0]  train_class,
  input  logic            train_stop,
  output logic            training,
  output logic [TW-1:0]   train_frames,
  output logic            committed,
  // features in
  input  logic            feat_valid,
  output logic            feat_ready,
  input  act_t            feat_data,
  // classification out
  output logic            res_valid,
  output logic [CLW-1:0]  res_class,
  output logic [SUMW-1:0] res_sum,
  output logic [FA:0]     res_frames
);
  logic          hv_valid, hv_fire, hv_last, s_ready, r_ready;
  logic [W-1:0]  hv_chunk;
  logic [CA-1:0] hv_idx;

  logic           r_we;
  logic [CLW-1:0] r_class;
  logic [CA-1:0]  r_chunk;
  logic [W-1:0]   r_data;

  assign hv_fire = hv_valid && s_ready && r_ready;

  hd_encoder #(.D(D), .W(W), .K(K), .LEVELS(LEVELS)) u_enc (
    .clk, .rst_n, .pos_we, .pos_waddr, .lvl_we, .lvl_waddr, .item_wdata,
    .feat_valid, .feat_ready, .feat_data,
    .hv_valid, .hv_ready(s_ready && r_ready), .hv_chunk, .hv_idx, .hv_last);

  hd_search #(.D(D), .W(W), .C_MAX(C_MAX), .F(F)) u_search (
    .clk, .rst_n, .num_classes, .win_clear(win_clear || committed || nc_we),
    .ex_we(r_we || ex_we), .ex_class(r_we ? r_class : ex_class),
    .ex_chunk(r_we ? r_chunk : ex_chunk), .ex_data(r_we ? r_data : ex_data),
    .hv_valid(hv_fire), .hv_ready(s_ready), .hv_chunk, .hv_idx, .hv_last,
    .res_valid, .res_class, .res_sum, .res_frames);

  hd_reconfig #(.D(D), .W(W), .C_MAX(C_MAX), .TW(TW)) u_rcfg (
    .clk, .rst_n, .train_start, .train_class, .train_stop,
    .hv_valid(hv_fire), .hv_ready(r_ready), .hv_chunk, .hv_idx, .hv_last,
    .ex_we(r_we), .ex_class(r_class), .ex_chunk(r_chunk), .ex_data(r_data),
    .training, .frames(train_frames), .committed);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) num_classes <= '0;
    else if (committed && r_class >= num_classes) num_classes <= r_class + 1'b1;
    else if (nc_we) num_classes <= nc_data;
  end
endmodule
