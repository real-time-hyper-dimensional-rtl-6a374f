// hd_encoder: turns the K features of one frame into a D-bit hypervector.
//
// The K signed 8-bit features of a time step arrive on the feature stream and
// are kept in a feature buffer. The frame hypervector is then the bitwise
// majority (bundling) of the K bound vectors P[k] ^ L[q(v_k)] (hd_item_mem),
//   H[d] = 1  iff  2 * #{k : P[k][d] ^ L[q(v_k)][d] = 1} > K
// so ties go to 0. The level of a feature is q(v) = (v + 128) >> (8 - LB),
// LEVELS = 2^LB.
//
// The vector is built W bits at a time: for chunk c the encoder looks up all
// K features, adds each bound bit into one of W counters, and hands the
// thresholded chunk downstream on the hv_* stream (valid/ready, with the
// chunk index and a last flag) before starting the next chunk.
//
// Timing: K + 2 cycles per chunk when hv_ready is high, so
// NCH * (K + 2) cycles per frame (NCH = D/W); feat_ready is low from the
// K-th feature until the last chunk has been accepted.
//
// From the source: XOR binding of value and position, majority bundling, K
// features and D dimensions. Chunking, the level quantiser and the tie rule
// are this design's choice.
module hd_encoder
  import hyd_pkg::*;
#(
  parameter int D      = 4096,
  parameter int W      = 256,
  parameter int K      = 512,
  parameter int LEVELS = 256,
  localparam int NCH = D / W,
  localparam int CA  = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int KA  = $clog2(K),
  localparam int LA  = $clog2(LEVELS),
  localparam int PAW = $clog2(K * NCH),
  localparam int LAW = $clog2(LEVELS * NCH),
  localparam int CNTW = $clog2(K + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  // model load (item memories)
  input  logic           pos_we,
  input  logic [PAW-1:0] pos_waddr,
  input  logic           lvl_we,
  input  logic [LAW-1:0] lvl_waddr,
  input  logic [W-1:0]   item_wdata,
  // features in
  input  logic           feat_valid,
  output logic           feat_ready,
  input  act_t           feat_data,
  // hypervector chunks out
  output logic           hv_valid,
  input  logic           hv_ready,
  output logic [W-1:0]   hv_chunk,
  output logic [CA-1:0]  hv_idx,
  output logic           hv_last
);
  typedef enum logic [1:0] {E_LOAD, E_ISSUE, E_FLUSH, E_OUT} enc_state_e;
  enc_state_e st;

  act_t            feat [K];
  logic [KA:0]     f_cnt;
  logic [KA-1:0]   k_cnt;
  logic [CA-1:0]   c_cnt;
  logic [CNTW-1:0] cnt [W];

  logic          bvalid;
  logic [W-1:0]  bound;
  logic [7:0]    v_off;
  assign v_off = 8'(feat[k_cnt]) ^ 8'h80;   // v + 128

  hd_item_mem #(.D(D), .W(W), .K(K), .LEVELS(LEVELS)) u_items (
    .clk, .rst_n, .pos_we, .pos_waddr, .lvl_we, .lvl_waddr, .wdata(item_wdata),
    .rd_en(st == E_ISSUE), .rd_k(k_cnt), .rd_lvl(LA'(v_off >> (8 - LA))),
    .rd_c(c_cnt), .bound_valid(bvalid), .bound(bound));

  assign feat_ready = (st == E_LOAD);
  assign hv_valid   = (st == E_OUT);
  assign hv_idx     = c_cnt;
  assign hv_last    = (c_cnt == CA'(NCH - 1));

  always_comb
    for (int i = 0; i < W; i++)
      hv_chunk[i] = (32'(cnt[i]) * 2) > K;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= E_LOAD;
      f_cnt <= '0;
      k_cnt <= '0;
      c_cnt <= '0;
    end else begin
      unique case (st)
        E_LOAD: if (feat_valid) begin
          f_cnt <= f_cnt + 1'b1;
          if (f_cnt == (KA+1)'(K - 1)) begin
            st    <= E_ISSUE;
            k_cnt <= '0;
            c_cnt <= '0;
          end
        end
        E_ISSUE: begin
          k_cnt <= k_cnt + 1'b1;
          if (k_cnt == KA'(K - 1)) st <= E_FLUSH;
        end
        E_FLUSH: st <= E_OUT;            // last bound vector is counted now
        E_OUT: if (hv_ready) begin
          if (hv_last) begin
            st    <= E_LOAD;
            f_cnt <= '0;
          end else begin
            c_cnt <= c_cnt + 1'b1;
            k_cnt <= '0;
            st    <= E_ISSUE;
          end
        end
        default: st <= E_LOAD;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == E_LOAD && feat_valid) feat[KA'(f_cnt)] <= feat_data;
    for (int i = 0; i < W; i++)
      if ((st == E_OUT && hv_ready) || st == E_LOAD) cnt[i] <= '0;
      else if (bvalid) cnt[i] <= cnt[i] + CNTW'(bound[i]);
  end

endmodule
