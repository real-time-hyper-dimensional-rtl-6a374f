// lstm_accel: LSTM accelerator, a reduced NNPE with one SACC vector.
//
// One time step computes, for every hidden unit j and gate q in (i, f, g, o),
//   gate[q][j] = act_q((W_q[j] . [x ; h_prev]) >>> shift + bias)
// where act is sigmoid for i, f, o and tanh for g, then the cell update
// (lstm_cell) gives c[j] and h[j]. The dot products run on one N-lane
// sacc_vector: the concatenated input z = [x ; h_prev] (X_LEN + H_LEN bytes)
// is held on chip as ZW words of N bytes, and the kernel weights stream in
// from external memory, one word of N weight codes per cycle, in the order
// unit j, gate q (i, f, g, o), word m. Per-gate-row bias and shift
// (sacc_outfn) are loaded through cw_*, entry q*H_LEN + j.
//
// Flow: bytes of x arrive on the x stream (valid/ready); when X_LEN have
// arrived the step starts by itself. New h values go to a side memory so the
// whole step reads h_prev. At the end h is copied into z (it is the recurrent
// input of the next step) and streamed out on h_* to the HD classifier.
// `seq_reset` clears h and c before a new sequence.
//
// Timing: ZW weight beats per gate row, so 4 * H_LEN * ZW cycles per step
// when the weight stream never stalls (a missing weight beat stalls the step),
// plus the pipeline (about 7 cycles) and H_LEN cycles of h copy-out.
//
// From the source: the LSTM is a modified NNPE of 160 SACC lanes, sigmoid and
// tanh by lookup table, 2048-byte input (ResNet50 features) and 512-byte
// output per time step, weights loaded from external memory. The weight
// order, the on-chip z memory and the separate cell datapath are this
// design's choice.
module lstm_accel
  import hyd_pkg::*;
#(
  parameter int N     = 160,
  parameter int X_LEN = 2048,
  parameter int H_LEN = 512,
  localparam int Z_LEN = X_LEN + H_LEN,
  localparam int ZW    = (Z_LEN + N - 1) / N,
  localparam int HW    = $clog2(H_LEN),
  localparam int CW    = $clog2(4 * H_LEN)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           seq_reset,   // clear h and c (start of a sequence)
  // input features of one time step
  input  logic           x_valid,
  output logic           x_ready,
  input  act_t           x_data,
  // kernel weights from external memory
  input  logic           wt_valid,
  output logic           wt_ready,
  input  wcode_t [N-1:0] wt_data,
  // per-gate-row bias / shift
  input  logic           cw_en,
  input  logic [CW-1:0]  cw_addr,
  input  chan_param_t    cw_data,
  // hidden state out
  output logic           h_valid,
  input  logic           h_ready,
  output act_t           h_data,
  output logic           h_last,
  output logic           busy,
  output logic           step_done
);
  localparam int ZWA = (ZW > 1) ? $clog2(ZW) : 1;
  localparam int NA  = $clog2(N);

  typedef enum logic [2:0] {L_IDLE, L_CLR, L_RUN, L_WAIT, L_COPY} lstm_state_e;
  lstm_state_e st;

  act_t [N-1:0]        z [ZW];
  logic signed [15:0]  c_mem [H_LEN];
  act_t                hn_mem [H_LEN];
  chan_param_t         cp_mem [4*H_LEN];

  logic [15:0]    x_cnt;
  logic [ZWA-1:0] x_word, h_word;
  logic [NA-1:0]  x_lane, h_lane;
  logic [HW:0]    j_cnt, units_done;
  logic [1:0]     q_cnt;
  logic [ZWA-1:0] m_cnt;

  logic beat, beat_first, beat_last, all_issued;
  assign wt_ready   = (st == L_RUN) && !all_issued;
  assign beat       = wt_valid && wt_ready;
  assign beat_first = (m_cnt == '0);
  assign beat_last  = (m_cnt == ZWA'(ZW - 1));

  assign x_ready = (st == L_IDLE) && (x_cnt < 16'(X_LEN));
  assign busy    = (st != L_IDLE);

  // ------------------------------------------------------- dot products
  logic signed [31:0] acc;
  logic               sdone, gvalid;
  act_t               gy;
  logic [HW-1:0]      tj1, tj2, tj3;
  logic [1:0]         tq1, tq2, tq3;

  sacc_vector #(.N(N), .ACC_W(32)) u_sacc (
    .clk, .rst_n, .in_valid(beat), .first(beat_first), .last(beat && beat_last),
    .data(z[m_cnt]), .wcode(wt_data), .done(sdone), .acc(acc));

  sacc_outfn #(.ACC_W(32)) u_outfn (
    .clk, .rst_n, .in_valid(sdone), .acc(acc),
    .cp(cp_mem[CW'(tq2) * CW'(H_LEN) + CW'(tj2)]),
    .act(tq2 == 2'd2 ? ACT_TANH : ACT_SIGMOID),
    .out_valid(gvalid), .y(gy));

  always_ff @(posedge clk) begin
    tj1 <= HW'(j_cnt); tq1 <= q_cnt;
    tj2 <= tj1;        tq2 <= tq1;
    tj3 <= tj2;        tq3 <= tq2;
    if (cw_en) cp_mem[cw_addr] <= cw_data;
  end

  // ------------------------------------------------ gates -> cell update
  act_t               g_i, g_f, g_g;
  logic               cv;
  logic [HW-1:0]      cidx;
  logic signed [15:0] c_upd;
  act_t               h_upd;

  always_ff @(posedge clk)
    if (gvalid)
      unique case (tq3)
        2'd0: g_i <= gy;
        2'd1: g_f <= gy;
        2'd2: g_g <= gy;
        default: ;
      endcase

  lstm_cell #(.IDX_W(HW)) u_cell (
    .clk, .rst_n, .in_valid(gvalid && tq3 == 2'd3), .in_idx(tj3),
    .gi(g_i), .gf(g_f), .gg(g_g), .go(gy), .c_old(c_mem[tj3]),
    .out_valid(cv), .out_idx(cidx), .c_new(c_upd), .h(h_upd));

  // ---------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= L_CLR;
      x_cnt      <= '0;
      x_word     <= '0;
      x_lane     <= '0;
      h_word     <= ZWA'(X_LEN / N);
      h_lane     <= NA'(X_LEN % N);
      j_cnt      <= '0;
      q_cnt      <= '0;
      m_cnt      <= '0;
      units_done <= '0;
      all_issued <= 1'b0;
      step_done  <= 1'b0;
    end else begin
      step_done <= 1'b0;
      if (cv) units_done <= units_done + 1'b1;
      unique case (st)
        L_IDLE: begin
          if (seq_reset) begin
            st <= L_CLR;
          end else if (x_valid && x_ready) begin
            z[x_word][x_lane] <= x_data;
            x_cnt <= x_cnt + 16'd1;
            if (x_lane == NA'(N - 1)) begin
              x_lane <= '0;
              x_word <= x_word + 1'b1;
            end else x_lane <= x_lane + 1'b1;
          end else if (x_cnt == 16'(X_LEN)) begin
            st         <= L_RUN;
            j_cnt      <= '0;
            q_cnt      <= '0;
            m_cnt      <= '0;
            units_done <= '0;
            all_issued <= 1'b0;
          end
        end
        L_CLR, L_COPY: begin
          // L_CLR zeroes h_prev and c; L_COPY moves the new h into z and
          // streams it out. Both walk the h part of z one byte per cycle.
          if (st == L_CLR || h_ready) begin
            z[h_word][h_lane] <= (st == L_CLR) ? act_t'(0) : hn_mem[HW'(j_cnt)];
            if (h_lane == NA'(N - 1)) begin
              h_lane <= '0;
              h_word <= h_word + 1'b1;
            end else h_lane <= h_lane + 1'b1;
            j_cnt <= j_cnt + 1'b1;
            if (j_cnt == (HW+1)'(H_LEN - 1)) begin
              st     <= L_IDLE;
              j_cnt  <= '0;
              h_word <= ZWA'(X_LEN / N);
              h_lane <= NA'(X_LEN % N);
              if (st == L_COPY) begin
                step_done <= 1'b1;
                x_cnt     <= '0;
                x_word    <= '0;
                x_lane    <= '0;
              end
            end
          end
        end
        L_RUN: begin
          if (beat) begin
            if (!beat_last) m_cnt <= m_cnt + 1'b1;
            else begin
              m_cnt <= '0;
              q_cnt <= q_cnt + 2'd1;
              if (q_cnt == 2'd3) begin
                if (j_cnt == (HW+1)'(H_LEN - 1)) begin
                  all_issued <= 1'b1;
                  st         <= L_WAIT;
                end
                j_cnt <= j_cnt + 1'b1;
              end
            end
          end
        end
        L_WAIT: begin
          if (units_done == (HW+1)'(H_LEN) || (cv && units_done == (HW+1)'(H_LEN - 1))) begin
            st    <= L_COPY;
            j_cnt <= '0;
          end
        end
        default: st <= L_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk)
    if (cv) begin
      c_mem[cidx]  <= c_upd;
      hn_mem[cidx] <= h_upd;
    end else if (st == L_CLR) begin
      c_mem[HW'(j_cnt)] <= '0;
    end

  assign h_valid = (st == L_COPY);
  assign h_data  = hn_mem[HW'(j_cnt)];
  assign h_last  = (st == L_COPY) && (j_cnt == (HW+1)'(H_LEN - 1));

  a_h_hold: assert property (@(posedge clk) disable iff (!rst_n)
    h_valid && !h_ready |=> h_valid && $stable(h_data));
endmodule
