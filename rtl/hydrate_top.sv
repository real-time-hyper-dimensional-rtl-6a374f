// hydrate_top: HyDRATE video activity classifier, LRCN + HD configuration.
//
// Three accelerators in a chain, as in the LRCN mapping of the design:
//   nnpe          ResNet50 spatial encoder, layer by layer, on S x N SACC
//                 lanes with swappable on-chip data buffers;
//   lstm_accel    temporal network, one time step per frame, on one N_L-lane
//                 SACC vector with sigmoid/tanh tables;
//   hd_classifier HD mapping, exemplar search over a sliding window and
//                 on-device reconfiguration (new class exemplars).
// The final ResNet50 output (X_LEN bytes) is streamed out of the NNPE data
// buffer straight into the LSTM input, and the LSTM hidden state (H_LEN
// bytes) straight into the HD classifier, one byte per cycle with
// valid/ready; a busy LSTM holds the NNPE readout back. Because the LSTM and
// the HD classifier work on their own, the NNPE can compute the next frame
// while the LSTM processes the current one.
//
// Everything a processor would do is left to the ports: loading images and
// parameters into the NNPE buffers, sequencing ResNet50 layers through run
// descriptors, streaming LSTM kernel weights from external memory, loading
// the HD model, and starting or stopping reconfiguration. In the source
// these go through DMA engines and a register map driven by a real-time
// processor; neither is specified there, so plain write ports stand in.
//
// Timing: see the blocks. With the defaults, an NNPE run takes
// groups*pixels*M cycles, an LSTM step 4 * 512 * 16 = 32768 cycles plus 512
// cycles of copy-out, and an HD frame 16 * 514 = 8224 cycles.
module hydrate_top
  import hyd_pkg::*;
#(
  // NNPE (ResNet50)
  parameter int S          = 8,
  parameter int N          = 256,
  parameter int BUF_DEPTH  = 4096,
  parameter int PBUF_DEPTH = 512,
  parameter int CP_DEPTH   = 256,
  // LSTM
  parameter int N_L        = 160,
  parameter int X_LEN      = 2048,
  parameter int H_LEN      = 512,
  // HD classifier (K = H_LEN features)
  parameter int D          = 4096,
  parameter int W          = 256,
  parameter int LEVELS     = 256,
  parameter int C_MAX      = 101,
  parameter int F          = 12,
  localparam int BAW  = $clog2(BUF_DEPTH),
  localparam int PAW  = $clog2(PBUF_DEPTH),
  localparam int CAW  = $clog2(CP_DEPTH),
  localparam int SW   = (S > 1) ? $clog2(S) : 1,
  localparam int LCW  = $clog2(4 * H_LEN),
  localparam int NCH  = D / W,
  localparam int CA   = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int CLW  = $clog2(C_MAX + 1),
  localparam int IPAW = $clog2(H_LEN * NCH),
  localparam int ILAW = $clog2(LEVELS * NCH),
  localparam int SUMW = $clog2(D + 1) + $clog2(F + 1),
  localparam int FA   = (F > 1) ? $clog2(F) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // ---- NNPE: buffer, parameter and channel-parameter load, runs, readout
  input  logic             dw_en,
  input  logic [BAW-1:0]   dw_addr,
  input  act_t [N-1:0]     dw_data,
  input  logic             pw_en,
  input  logic [SW-1:0]    pw_sel,
  input  logic [PAW-1:0]   pw_addr,
  input  wcode_t [N-1:0]   pw_data,
  input  logic             cw_en,
  input  logic [SW-1:0]    cw_sel,
  input  logic [CAW-1:0]   cw_addr,
  input  chan_param_t      cw_data,
  input  logic             nn_start,
  input  nnpe_desc_t       nn_desc,
  output logic             nn_busy,
  output logic             nn_done,
  output logic             nn_buf_sel,
  input  logic             feat_start,   // send X_LEN result bytes to the LSTM
  input  logic [BAW-1:0]   feat_base,
  // ---- LSTM: sequence reset, kernel weight stream, gate-row parameters
  input  logic             lstm_seq_reset,
  input  logic             lstm_wt_valid,
  output logic             lstm_wt_ready,
  input  wcode_t [N_L-1:0] lstm_wt_data,
  input  logic             lstm_cw_en,
  input  logic [LCW-1:0]   lstm_cw_addr,
  input  chan_param_t      lstm_cw_data,
  output logic             lstm_busy,
  output logic             lstm_step_done,
  // ---- HD classifier: model load, reconfiguration, result
  input  logic             hd_pos_we,
  input  logic [IPAW-1:0]  hd_pos_waddr,
  input  logic             hd_lvl_we,
  input  logic [ILAW-1:0]  hd_lvl_waddr,
  input  logic [W-1:0]     hd_item_wdata,
  input  logic             hd_ex_we,
  input  logic [CLW-1:0]   hd_ex_class,
  input  logic [CA-1:0]    hd_ex_chunk,
  input  logic [W-1:0]     hd_ex_data,
  input  logic             hd_nc_we,
  input  logic [CLW-1:0]   hd_nc_data,
  output logic [CLW-1:0]   hd_num_classes,
  input  logic             hd_win_clear,
  input  logic             hd_train_start,
  input  logic [CLW-1:0]   hd_train_class,
  input  logic             hd_train_stop,
  output logic             hd_training,
  output logic [15:0]      hd_train_frames,
  output logic             hd_committed,
  output logic             class_valid,
  output logic [CLW-1:0]   class_id,
  output logic [SUMW-1:0]  class_dist_sum,
  output logic [FA:0]      class_frames
);
  // NNPE result -> LSTM input
  logic x_valid, x_ready, x_last;
  act_t x_data;
  // LSTM hidden state -> HD features
  logic h_valid, h_ready, h_last;
  act_t h_data;

  nnpe #(.S(S), .N(N), .BUF_DEPTH(BUF_DEPTH), .PBUF_DEPTH(PBUF_DEPTH),
         .CP_DEPTH(CP_DEPTH)) u_nnpe (
    .clk, .rst_n, .dw_en, .dw_addr, .dw_data, .pw_en, .pw_sel, .pw_addr,
    .pw_data, .cw_en, .cw_sel, .cw_addr, .cw_data,
    .start(nn_start), .desc(nn_desc), .busy(nn_busy), .done(nn_done),
    .buf_sel(nn_buf_sel),
    .ro_start(feat_start), .ro_base(feat_base), .ro_len(24'(X_LEN)),
    .ro_valid(x_valid), .ro_ready(x_ready), .ro_data(x_data), .ro_last(x_last));

  lstm_accel #(.N(N_L), .X_LEN(X_LEN), .H_LEN(H_LEN)) u_lstm (
    .clk, .rst_n, .seq_reset(lstm_seq_reset),
    .x_valid, .x_ready, .x_data,
    .wt_valid(lstm_wt_valid), .wt_ready(lstm_wt_ready), .wt_data(lstm_wt_data),
    .cw_en(lstm_cw_en), .cw_addr(lstm_cw_addr), .cw_data(lstm_cw_data),
    .h_valid, .h_ready, .h_data, .h_last,
    .busy(lstm_busy), .step_done(lstm_step_done));

  hd_classifier #(.D(D), .W(W), .K(H_LEN), .LEVELS(LEVELS), .C_MAX(C_MAX),
                  .F(F), .TW(16)) u_hd (
    .clk, .rst_n,
    .pos_we(hd_pos_we), .pos_waddr(hd_pos_waddr), .lvl_we(hd_lvl_we),
    .lvl_waddr(hd_lvl_waddr), .item_wdata(hd_item_wdata),
    .ex_we(hd_ex_we), .ex_class(hd_ex_class), .ex_chunk(hd_ex_chunk),
    .ex_data(hd_ex_data), .nc_we(hd_nc_we), .nc_data(hd_nc_data),
    .num_classes(hd_num_classes), .win_clear(hd_win_clear),
    .train_start(hd_train_start), .train_class(hd_train_class),
    .train_stop(hd_train_stop), .training(hd_training),
    .train_frames(hd_train_frames), .committed(hd_committed),
    .feat_valid(h_valid), .feat_ready(h_ready), .feat_data(h_data),
    .res_valid(class_valid), .res_class(class_id), .res_sum(class_dist_sum),
    .res_frames(class_frames));

  // The NNPE readout and the LSTM input, and the LSTM output and the HD
  // feature buffer, must agree on the vector length.
  a_x_length: assert property (@(posedge clk) disable iff (!rst_n)
    x_valid && x_ready && x_last |=> !x_ready);
  a_h_length: assert property (@(posedge clk) disable iff (!rst_n)
    h_valid && h_ready && h_last |=> !h_ready);
endmodule
