// hd_search: associative memory of the HD classifier.
//
// Holds up to C_MAX class exemplars of D bits and, for each frame
// hypervector, finds the class that is nearest in Hamming distance averaged
// over a sliding window of the last F frames.
//
// Per frame: every W-bit chunk c that arrives on the hv_* stream is compared
// with chunk c of each active class n < num_classes, one class per cycle:
//   fdist[n] += popcount(chunk ^ E[n][c])
// After the last chunk, a window pass updates, one class per cycle,
//   sum[n] = sum[n] + fdist[n] - hist[slot][n];  hist[slot][n] = fdist[n]
// (hist entries of frames before the last window clear count as 0) and keeps
// the smallest sum. The result is the class with the smallest windowed
// distance sum (ties: lowest class index), the sum itself and the number of
// frames in the window; the average is sum / frames, whose arg-min is the
// same. `win_clear` restarts the window, e.g. at a new video or after a class
// was added.
//
// Exemplars are stored at class*NCH + chunk in a RAM written through ex_*.
//
// Timing: hv_ready drops for num_classes + 1 cycles after each chunk; the
// result follows the last chunk after num_classes*2 + about 3 cycles.
//
// From the source: Hamming distance to class exemplars, 101 UCF101 classes,
// a 12-frame sliding window whose distances are averaged. The chunked
// sequential search and the running-sum window are this design's choice.
module hd_search #(
  parameter int D     = 4096,
  parameter int W     = 256,
  parameter int C_MAX = 101,
  parameter int F     = 12,
  localparam int NCH  = D / W,
  localparam int CA   = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int CLW  = $clog2(C_MAX + 1),
  localparam int EAW  = $clog2(C_MAX * NCH),
  localparam int DW   = $clog2(D + 1),
  localparam int FA   = (F > 1) ? $clog2(F) : 1,
  localparam int SUMW = DW + $clog2(F + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CLW-1:0]   num_classes,
  input  logic             win_clear,
  // exemplar write
  input  logic             ex_we,
  input  logic [CLW-1:0]   ex_class,
  input  logic [CA-1:0]    ex_chunk,
  input  logic [W-1:0]     ex_data,
  // hypervector chunks in
  input  logic             hv_valid,
  output logic             hv_ready,
  input  logic [W-1:0]     hv_chunk,
  input  logic [CA-1:0]    hv_idx,
  input  logic             hv_last,
  // result
  output logic             res_valid,
  output logic [CLW-1:0]   res_class,
  output logic [SUMW-1:0]  res_sum,
  output logic [FA:0]      res_frames
);
  typedef enum logic [1:0] {H_IDLE, H_CMP, H_WIN} srch_state_e;
  srch_state_e st;

  logic [W-1:0]    q_chunk;
  logic [CA-1:0]   q_idx;
  logic            q_last;
  logic [CLW-1:0]  n_cnt;          // class being read
  logic            cmp_v;          // exemplar word of class n_d arrives
  logic [CLW-1:0]  n_d;
  logic [W-1:0]    ex_q;

  logic [DW-1:0]   fdist [C_MAX];
  logic [DW-1:0]   hist [F][C_MAX];
  logic [SUMW-1:0] sum  [C_MAX];
  logic [F-1:0]    slot_ok;
  logic [FA-1:0]   slot;
  logic [FA:0]     frames;
  logic            fresh;          // window was cleared: sums restart at 0

  logic [SUMW-1:0] best_sum, new_sum;
  logic [CLW-1:0]  best_cls;

  dp_ram #(.W(W), .DEPTH(C_MAX * NCH)) u_ex (
    .clk, .we(ex_we), .waddr(EAW'(ex_class) * EAW'(NCH) + EAW'(ex_chunk)),
    .wbe('1), .wdata(ex_data),
    .raddr(EAW'(n_cnt) * EAW'(NCH) + EAW'(q_idx)), .rdata(ex_q));

  function automatic logic [DW-1:0] popcount(logic [W-1:0] v);
    logic [DW-1:0] c = '0;
    for (int i = 0; i < W; i++) c += DW'(v[i]);
    return c;
  endfunction

  assign hv_ready = (st == H_IDLE);

  always_comb
    new_sum = (fresh ? '0 : sum[n_cnt]) + SUMW'(fdist[n_cnt])
              - (slot_ok[slot] ? SUMW'(hist[slot][n_cnt]) : '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= H_IDLE;
      q_chunk    <= '0;
      q_idx      <= '0;
      q_last     <= 1'b0;
      n_cnt      <= '0;
      cmp_v      <= 1'b0;
      n_d        <= '0;
      slot_ok    <= '0;
      slot       <= '0;
      frames     <= '0;
      fresh      <= 1'b1;
      best_sum   <= '0;
      best_cls   <= '0;
      res_valid  <= 1'b0;
      res_class  <= '0;
      res_sum    <= '0;
      res_frames <= '0;
    end else begin
      res_valid <= 1'b0;
      cmp_v     <= (st == H_CMP);
      n_d       <= n_cnt;
      if (win_clear) begin
        slot_ok <= '0;
        slot    <= '0;
        frames  <= '0;
        fresh   <= 1'b1;
      end
      unique case (st)
        H_IDLE: if (hv_valid) begin
          q_chunk <= hv_chunk;
          q_idx   <= hv_idx;
          q_last  <= hv_last;
          n_cnt   <= '0;
          st      <= (num_classes == 0) ? H_IDLE : H_CMP;
        end
        H_CMP: begin
          if (n_cnt == num_classes - 1'b1) begin
            st    <= H_WIN;       // one more cycle for the last exemplar
            n_cnt <= '0;
          end else n_cnt <= n_cnt + 1'b1;
        end
        H_WIN: begin
          if (cmp_v) begin end     // last comparison lands this cycle
          else if (!q_last) st <= H_IDLE;
          else begin
            // window pass over the classes, one per cycle
            if (n_cnt == '0 || new_sum < best_sum) begin
              best_sum <= new_sum;
              best_cls <= n_cnt;
            end
            if (n_cnt == num_classes - 1'b1) begin
              st         <= H_IDLE;
              n_cnt      <= '0;
              slot_ok[slot] <= 1'b1;
              slot       <= (slot == FA'(F - 1)) ? '0 : slot + 1'b1;
              frames     <= (frames == (FA+1)'(F)) ? frames : frames + 1'b1;
              fresh      <= 1'b0;
              res_valid  <= 1'b1;
              res_class  <= (n_cnt == '0 || new_sum < best_sum) ? n_cnt : best_cls;
              res_sum    <= (n_cnt == '0 || new_sum < best_sum) ? new_sum : best_sum;
              res_frames <= (frames == (FA+1)'(F)) ? frames : frames + 1'b1;
            end else n_cnt <= n_cnt + 1'b1;
          end
        end
        default: st <= H_IDLE;
      endcase
    end
  end

  // Distance accumulation (chunk 0 restarts the per-frame distances) and the
  // window memories.
  always_ff @(posedge clk) begin
    if (cmp_v)
      fdist[n_d] <= ((q_idx == '0) ? '0 : fdist[n_d]) + popcount(q_chunk ^ ex_q);
    if (st == H_WIN && !cmp_v && q_last) begin
      sum[n_cnt]        <= new_sum;
      hist[slot][n_cnt] <= fdist[n_cnt];
    end
  end

  a_class_range: assert property (@(posedge clk) disable iff (!rst_n)
    ex_we |-> ex_class < CLW'(C_MAX));
endmodule
