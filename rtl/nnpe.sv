// nnpe: Neural Network Processing Engine (the ResNet50 accelerator).
//
// S vector SACC modules (sacc_vector, N lanes each) share one data input
// buffer and each have their own parameter buffer. All S modules read the
// same N-byte input word on every cycle, so one pass produces S output
// channels of one output pixel after M cycles (an M x N vector operation,
// with M x N >= k*k*Cin). The controller repeats this for every output pixel
// and then for every group of S output channels (Cout/S times). Each result
// goes through the output functions (sacc_outfn) and is written into the data
// output buffer in the layout the next layer reads. When a run is flagged
// `swap`, the input and output buffers change roles afterwards, so a network
// runs layer after layer without moving layer data to external memory.
//
// Layout and addressing (this design's choice; the source only says the
// buffers are "organized to provide M x N wide data"):
//   * input word of pixel p, word m:  in_base + p*pix_stride + m
//   * parameter word of group g, m:   p_base + g*M + m (same in each buffer)
//   * output byte of pixel p, group g, SACC s:
//         out_base + p*cout + (group_base + g)*S + s
//     i.e. channels of one pixel are contiguous, S-byte aligned. The output
//     buffer is N bytes wide, so a 1x1 convolution or a fully connected layer
//     can read it back directly with pix_stride = cout/N. The im2col
//     arrangement a k x k convolution needs is expected to be prepared by the
//     loader; this engine does not rearrange data.
//
// Interfaces: the dw_* port writes N-byte words into the current input
// buffer (the DMA side), pw_* writes parameter-buffer words of SACC pw_sel,
// cw_* writes per-channel batch-norm parameters. `start` with `desc` launches
// a run; `done` pulses when its last result is written. ro_* streams bytes
// out of the current input buffer (after a swapping run: the result), one
// byte per accepted beat, with valid/ready.
//
// Timing: one input word per cycle with no stalls; with `start` in cycle c,
// `done` pulses in cycle c + n_groups * n_pix * m_words + 6 (the extra cycles
// are the buffer read, the adder tree, the accumulator, the output functions
// and the write). Readout gives one byte per cycle while
// ro_ready is high, plus two cycles per N-byte word for the buffer read.
//
// From the source: S = 8 SACC arrays of N = 256 lanes, swappable input and
// output buffers, a parameter buffer per SACC, output functions. Buffer depths
// are this design's choice (see the parameters).
module nnpe
  import hyd_pkg::*;
#(
  parameter int S          = 8,
  parameter int N          = 256,
  parameter int BUF_DEPTH  = 4096,  // words of N bytes in each data buffer
  parameter int PBUF_DEPTH = 512,   // words of N weight codes per SACC
  parameter int CP_DEPTH   = 256,   // channel-parameter entries per SACC
  parameter int ACC_W      = 32,
  localparam int BAW = $clog2(BUF_DEPTH),
  localparam int PAW = $clog2(PBUF_DEPTH),
  localparam int CAW = $clog2(CP_DEPTH),
  localparam int SW  = (S > 1) ? $clog2(S) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // input-buffer load
  input  logic                   dw_en,
  input  logic [BAW-1:0]         dw_addr,
  input  act_t [N-1:0]           dw_data,
  // parameter-buffer load
  input  logic                   pw_en,
  input  logic [SW-1:0]          pw_sel,
  input  logic [PAW-1:0]         pw_addr,
  input  wcode_t [N-1:0]         pw_data,
  // channel-parameter load
  input  logic                   cw_en,
  input  logic [SW-1:0]          cw_sel,
  input  logic [CAW-1:0]         cw_addr,
  input  chan_param_t            cw_data,
  // run control
  input  logic                   start,
  input  nnpe_desc_t             desc,
  output logic                   busy,
  output logic                   done,
  output logic                   buf_sel,   // 0: buffer A is the input buffer
  // readout of the current input buffer
  input  logic                   ro_start,
  input  logic [BAW-1:0]         ro_base,
  input  logic [23:0]            ro_len,
  output logic                   ro_valid,
  input  logic                   ro_ready,
  output act_t                   ro_data,
  output logic                   ro_last
);
  localparam int LN = $clog2(N);

  // ---------------------------------------------------------------- run FSM
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} run_state_e;
  run_state_e st;

  nnpe_desc_t       d;
  logic [7:0]       m_cnt;
  logic [15:0]      p_cnt;
  logic [11:0]      g_cnt;
  logic [BAW-1:0]   pix_addr;      // input word of pixel p, m = 0
  logic [PAW-1:0]   grp_paddr;     // parameter word of group g, m = 0
  logic [23:0]      out_pix;       // output byte of pixel p, group 0
  logic [23:0]      g_off;         // (group_base + g) * S
  logic [2:0]       drain;

  logic issue, issue_first, issue_last;
  assign issue       = (st == S_RUN);
  assign issue_first = (m_cnt == 8'd0);
  assign issue_last  = (m_cnt == d.m_words - 8'd1);

  logic [BAW-1:0] in_raddr;
  logic [PAW-1:0] p_raddr;
  assign in_raddr = pix_addr + BAW'(m_cnt);
  assign p_raddr  = grp_paddr + PAW'(m_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      d         <= '0;
      m_cnt     <= '0;
      p_cnt     <= '0;
      g_cnt     <= '0;
      pix_addr  <= '0;
      grp_paddr <= '0;
      out_pix   <= '0;
      g_off     <= '0;
      drain     <= '0;
      done      <= 1'b0;
      buf_sel   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          d         <= desc;
          m_cnt     <= '0;
          p_cnt     <= '0;
          g_cnt     <= '0;
          pix_addr  <= BAW'(desc.in_base);
          grp_paddr <= PAW'(desc.p_base);
          out_pix   <= desc.out_base;
          g_off     <= 24'(desc.group_base) * 24'(S);
          st        <= (desc.n_pix == 0 || desc.n_groups == 0 || desc.m_words == 0)
                       ? S_DRAIN : S_RUN;
          drain     <= 3'd4;
        end
        S_RUN: begin
          if (!issue_last) begin
            m_cnt <= m_cnt + 8'd1;
          end else begin
            m_cnt <= '0;
            if (p_cnt != d.n_pix - 16'd1) begin
              p_cnt    <= p_cnt + 16'd1;
              pix_addr <= pix_addr + BAW'(d.pix_stride);
              out_pix  <= out_pix + 24'(d.cout);
            end else begin
              p_cnt     <= '0;
              pix_addr  <= BAW'(d.in_base);
              out_pix   <= d.out_base;
              grp_paddr <= grp_paddr + PAW'(d.m_words);
              g_off     <= g_off + 24'(S);
              if (g_cnt == d.n_groups - 12'd1) st <= S_DRAIN;
              else g_cnt <= g_cnt + 12'd1;
            end
          end
        end
        S_DRAIN: begin
          if (drain == 0) begin
            st   <= S_IDLE;
            done <= 1'b1;
            if (d.swap) buf_sel <= ~buf_sel;
          end else drain <= drain - 3'd1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

  // ------------------------------------------ result tags through the pipe
  // stage 1: buffer data out, stage 2: tree sum, stage 3: accumulator done,
  // stage 4: output function result.
  logic        v1, first1, last1;
  logic [23:0] oaddr1, oaddr2, oaddr3, oaddr4;
  logic [11:0] g1, g2, g3;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0;
      oaddr1 <= '0; oaddr2 <= '0; oaddr3 <= '0; oaddr4 <= '0;
      g1 <= '0; g2 <= '0; g3 <= '0;
    end else begin
      v1     <= issue;
      first1 <= issue_first;
      last1  <= issue && issue_last;
      oaddr1 <= out_pix + g_off;
      oaddr2 <= oaddr1;
      oaddr3 <= oaddr2;
      oaddr4 <= oaddr3;
      g1     <= g_cnt;
      g2     <= g1;
      g3     <= g2;
    end
  end

  // ------------------------------------------------------------ data buffers
  typedef enum logic [1:0] {R_IDLE, R_READ, R_CAP, R_SEND} ro_state_e;
  ro_state_e       rst_q;
  logic [BAW-1:0]  ro_addr;
  logic [LN-1:0]   ro_lane;
  logic [23:0]     ro_left;
  act_t [N-1:0]    ro_word;

  logic [N*8-1:0]  rd_a, rd_b, in_rdata;
  logic [BAW-1:0]  buf_raddr;
  logic            eng_we;
  logic [BAW-1:0]  eng_waddr;
  logic [N-1:0]    eng_wbe;
  act_t [N-1:0]    eng_wdata;

  assign buf_raddr = (st == S_RUN) ? in_raddr : ro_addr;
  assign in_rdata  = buf_sel ? rd_b : rd_a;

  dp_ram #(.W(N*8), .DEPTH(BUF_DEPTH)) u_buf_a (
    .clk, .raddr(buf_raddr), .rdata(rd_a),
    .we   (buf_sel ? eng_we : dw_en),
    .waddr(buf_sel ? eng_waddr : dw_addr),
    .wbe  (buf_sel ? eng_wbe : {N{1'b1}}),
    .wdata(buf_sel ? eng_wdata : dw_data));

  dp_ram #(.W(N*8), .DEPTH(BUF_DEPTH)) u_buf_b (
    .clk, .raddr(buf_raddr), .rdata(rd_b),
    .we   (buf_sel ? dw_en : eng_we),
    .waddr(buf_sel ? dw_addr : eng_waddr),
    .wbe  (buf_sel ? {N{1'b1}} : eng_wbe),
    .wdata(buf_sel ? dw_data : eng_wdata));

  // ------------------------------------------------ S SACC modules + outfn
  act_t [S-1:0] y;
  logic [S-1:0] y_valid;

  for (genvar s = 0; s < S; s++) begin : g_sacc
    wcode_t [N-1:0]          pdata;
    logic signed [ACC_W-1:0] acc;
    logic                    sdone;
    chan_param_t             cp_mem [CP_DEPTH];

    dp_ram #(.W(N*4), .DEPTH(PBUF_DEPTH)) u_pbuf (
      .clk, .raddr(p_raddr), .rdata(pdata),
      .we(pw_en && pw_sel == SW'(s)), .waddr(pw_addr), .wbe({N/2{1'b1}}),
      .wdata(pw_data));

    always_ff @(posedge clk)
      if (cw_en && cw_sel == SW'(s)) cp_mem[cw_addr] <= cw_data;

    sacc_vector #(.N(N), .ACC_W(ACC_W)) u_sacc (
      .clk, .rst_n, .in_valid(v1), .first(first1), .last(last1),
      .data(in_rdata), .wcode(pdata), .done(sdone), .acc(acc));

    sacc_outfn #(.ACC_W(ACC_W)) u_outfn (
      .clk, .rst_n, .in_valid(sdone), .acc(acc),
      .cp(cp_mem[CAW'(d.cp_base + g3)]), .act(d.act),
      .out_valid(y_valid[s]), .y(y[s]));
  end

  // Output write: S bytes at an S-aligned byte address of the output buffer.
  always_comb begin
    eng_we    = y_valid[0];
    eng_waddr = BAW'(oaddr4 >> LN);
    eng_wbe   = N'({S{1'b1}}) << oaddr4[LN-1:0];
    for (int b = 0; b < N; b++) eng_wdata[b] = y[b % S];
  end

  // ---------------------------------------------------------------- readout
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rst_q   <= R_IDLE;
      ro_addr <= '0;
      ro_lane <= '0;
      ro_left <= '0;
      ro_word <= '0;
    end else begin
      unique case (rst_q)
        R_IDLE: if (ro_start && ro_len != 0 && st == S_IDLE) begin
          ro_addr <= ro_base;
          ro_lane <= '0;
          ro_left <= ro_len;
          rst_q   <= R_READ;
        end
        R_READ: rst_q <= R_CAP;     // ro_addr is presented to the buffer
        R_CAP: begin                // its word arrives now
          ro_word <= in_rdata;
          rst_q   <= R_SEND;
        end
        R_SEND: if (ro_ready) begin
          ro_left <= ro_left - 24'd1;
          ro_lane <= ro_lane + 1'b1;
          if (ro_left == 24'd1) rst_q <= R_IDLE;
          else if (ro_lane == LN'(N - 1)) begin
            ro_addr <= ro_addr + 1'b1;
            rst_q   <= R_READ;
          end
        end
        default: rst_q <= R_IDLE;
      endcase
    end
  end

  assign ro_valid = (rst_q == R_SEND);
  assign ro_data  = ro_word[ro_lane];
  assign ro_last  = (rst_q == R_SEND) && (ro_left == 24'd1);

  // ------------------------------------------------------------- assertions
  initial begin
    assert (N == (1 << LN)) else $error("nnpe: N must be a power of two");
    assert (N % S == 0)     else $error("nnpe: S must divide N");
  end
  a_no_load_while_running: assert property (@(posedge clk) disable iff (!rst_n)
    st == S_RUN |-> !dw_en && !pw_en && !cw_en);
  a_ro_hold: assert property (@(posedge clk) disable iff (!rst_n)
    ro_valid && !ro_ready |=> ro_valid && $stable(ro_data));
endmodule
