// hd_reconfig: HD reconfiguration encoder, builds a new class exemplar.
//
// Training on the device needs no back-propagation: the exemplar of a class
// is the bitwise majority of the hypervectors of all its training frames.
// `train_start` (with `train_class`) clears D per-dimension counters; while
// training, every frame hypervector that passes on the hv_* stream adds its
// bits into them and counts one frame. `train_stop` writes the exemplar
//   E[d] = 1  iff  2 * count[d] > frames      (ties go to 0)
// chunk by chunk into the exemplar memory through ex_*, then pulses
// `committed`. Starting and stopping are under host control at any time, as
// in the source; a stop that comes in the middle of a frame takes effect
// after that frame's last chunk, and a stop with no frames writes nothing.
// A frame already under way when training starts is skipped.
//
// The counters are NCH words of W x TW bits; each arriving chunk is a
// read-modify-write of one word.
//
// Timing: clearing and committing take NCH cycles each (hv_ready is low
// then); a chunk is absorbed in the cycle it arrives.
//
// From the source: majority-vote bundling of training-frame hypervectors,
// user-initiated start/stop. Counter width and the tie rule are this
// design's choice.
module hd_reconfig #(
  parameter int D     = 4096,
  parameter int W     = 256,
  parameter int C_MAX = 101,
  parameter int TW    = 16,      // counter width: up to 2^TW - 1 frames
  localparam int NCH = D / W,
  localparam int CA  = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int CLW = $clog2(C_MAX + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           train_start,
  input  logic [CLW-1:0] train_class,
  input  logic           train_stop,
  // hypervector chunks (observed; hv_valid means the beat is taken)
  input  logic           hv_valid,
  output logic           hv_ready,
  input  logic [W-1:0]   hv_chunk,
  input  logic [CA-1:0]  hv_idx,
  input  logic           hv_last,
  // exemplar write-back
  output logic           ex_we,
  output logic [CLW-1:0] ex_class,
  output logic [CA-1:0]  ex_chunk,
  output logic [W-1:0]   ex_data,
  output logic           training,
  output logic [TW-1:0]  frames,
  output logic           committed
);
  typedef enum logic [1:0] {R_IDLE, R_CLR, R_TRAIN, R_COMMIT} rcfg_state_e;
  rcfg_state_e st;

  logic [TW-1:0] cnt [NCH][W];
  logic [CA-1:0] c_cnt;
  logic          in_frame, stop_pend;
  logic          take;             // chunk of a frame that began while training

  assign take = hv_valid && (hv_idx == '0 || in_frame);

  assign hv_ready = (st == R_IDLE) || (st == R_TRAIN);
  assign training = (st == R_TRAIN);
  assign ex_we    = (st == R_COMMIT);
  assign ex_chunk = c_cnt;

  always_comb
    for (int i = 0; i < W; i++)
      ex_data[i] = ({cnt[c_cnt][i], 1'b0}) > (TW+1)'(frames);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= R_IDLE;
      c_cnt     <= '0;
      ex_class  <= '0;
      frames    <= '0;
      committed <= 1'b0;
      in_frame  <= 1'b0;
      stop_pend <= 1'b0;
    end else begin
      committed <= 1'b0;
      if (train_start && st != R_COMMIT) begin
        st       <= R_CLR;
        c_cnt    <= '0;
        ex_class <= train_class;
        frames   <= '0;
        in_frame  <= 1'b0;
        stop_pend <= 1'b0;
      end else begin
        unique case (st)
          R_CLR: begin
            c_cnt <= c_cnt + 1'b1;
            if (c_cnt == CA'(NCH - 1)) st <= R_TRAIN;
          end
          R_TRAIN: begin
            if (take) begin
              in_frame <= !hv_last;
              if (hv_last && frames != '1) frames <= frames + 1'b1;
            end
            if (train_stop) stop_pend <= 1'b1;
            if ((train_stop || stop_pend) && !in_frame && !hv_valid) begin
              c_cnt     <= '0;
              stop_pend <= 1'b0;
              st        <= (frames == '0) ? R_IDLE : R_COMMIT;
            end
          end
          R_COMMIT: begin
            c_cnt <= c_cnt + 1'b1;
            if (c_cnt == CA'(NCH - 1)) begin
              st        <= R_IDLE;
              committed <= 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
  end

  // Counter memory: clear, or add the bits of an arriving chunk.
  always_ff @(posedge clk)
    for (int i = 0; i < W; i++)
      if (st == R_CLR) cnt[c_cnt][i] <= '0;
      else if (st == R_TRAIN && take && frames != '1)
        cnt[hv_idx][i] <= cnt[hv_idx][i] + TW'(hv_chunk[i]);

  a_no_chunk_while_clearing: assert property (@(posedge clk) disable iff (!rst_n)
    st == R_CLR |-> !hv_valid);
endmodule
