// tb_hydrate_top: end-to-end test of the whole accelerator chain at reduced
// sizes (NNPE with 2 SACC vectors of 8 lanes, LSTM with 4 lanes, 16 inputs
// and 8 hidden units, HD with D = 64 in 16-bit chunks, 7 class slots and a
// 4-frame window).
//
// Ten video frames go through the chain. For each frame the testbench writes
// an image into the NNPE input buffer and runs two layers (ReLU, then none,
// sigmoid or tanh in turn), each swapping the data buffers; the result is
// streamed into the LSTM, whose hidden state goes on to the HD classifier.
// A reference model in the testbench (written from the arithmetic rules,
// not from the RTL) predicts every class result, windowed distance sum and
// window length. The first frames are pipelined, so the NNPE computes and
// reads out a frame while the LSTM is still busy with the previous one; later
// frames wait for the previous result so that a sequence reset of the LSTM
// and a training episode (class 3 learned from frames 5 and 6, committed
// before frame 7, which grows the class count and restarts the window) land
// between frames. The LSTM weight stream has random gaps.
//
// Every mechanism is counted, and one that never happened is a failure:
// buffer swaps, readout held back by a busy LSTM, weight-stream stalls, LSTM
// steps, NNPE and LSTM running at once, sequence reset, full and sliding
// windows, the reconfiguration commit, class-count growth, and each output
// function.
module tb_hydrate_top;
  localparam int S = 2, N = 8, BUF_DEPTH = 64, PBUF_DEPTH = 16, CP_DEPTH = 8;
  localparam int N_L = 4, X_LEN = 16, H_LEN = 8;
  localparam int D = 64, W = 16, LEVELS = 16, C_MAX = 7, F = 4;
  // scenario
  localparam int P1 = 2, M1 = 2, G1 = 4, G2 = 4, CP2 = 4;
  localparam int NC0 = 3, NF = 10, SEQ_FROM = 4, TRAIN_FIRST = 5, TRAIN_LAST = 6;
  localparam int SEQ_RESET_AT = 8, LSTM_SHIFT = 6, NN_SHIFT = 6, WATCHDOG = 200000;
  import hyd_pkg::*;
  import tb_ref_pkg::*;

  // derived sizes (same formulas as the top)
  localparam int BAW  = $clog2(BUF_DEPTH);
  localparam int PAW  = $clog2(PBUF_DEPTH);
  localparam int CAW  = $clog2(CP_DEPTH);
  localparam int SW   = (S > 1) ? $clog2(S) : 1;
  localparam int LCW  = $clog2(4 * H_LEN);
  localparam int NCH  = D / W;
  localparam int CA   = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int CLW  = $clog2(C_MAX + 1);
  localparam int IPAW = $clog2(H_LEN * NCH);
  localparam int ILAW = $clog2(LEVELS * NCH);
  localparam int SUMW = $clog2(D + 1) + $clog2(F + 1);
  localparam int FA   = (F > 1) ? $clog2(F) : 1;
  localparam int LB   = $clog2(LEVELS);
  localparam int ZW   = (X_LEN + H_LEN + N_L - 1) / N_L;
  localparam int K    = H_LEN;
  // the two NNPE layers of a frame
  localparam int COUT1 = G1 * S;           // layer 1: P1 pixels, M1 words each
  localparam int M2    = COUT1 / N;        // layer 2 reads layer 1's pixels whole
  localparam int P2    = X_LEN / (G2 * S); // and writes X_LEN bytes
  localparam int IMG_WORDS = P1 * M1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic dw_en = 0; logic [BAW-1:0] dw_addr; act_t [N-1:0] dw_data;
  logic pw_en = 0; logic [SW-1:0] pw_sel; logic [PAW-1:0] pw_addr; wcode_t [N-1:0] pw_data;
  logic cw_en = 0; logic [SW-1:0] cw_sel; logic [CAW-1:0] cw_addr; chan_param_t cw_data;
  logic nn_start = 0; nnpe_desc_t nn_desc; logic nn_busy, nn_done, nn_buf_sel;
  logic feat_start = 0; logic [BAW-1:0] feat_base = '0;
  logic lstm_seq_reset = 0, lstm_wt_valid = 0, lstm_wt_ready;
  wcode_t [N_L-1:0] lstm_wt_data;
  logic lstm_cw_en = 0; logic [LCW-1:0] lstm_cw_addr; chan_param_t lstm_cw_data;
  logic lstm_busy, lstm_step_done;
  logic hd_pos_we = 0, hd_lvl_we = 0, hd_ex_we = 0, hd_nc_we = 0, hd_win_clear = 0;
  logic [IPAW-1:0] hd_pos_waddr; logic [ILAW-1:0] hd_lvl_waddr; logic [W-1:0] hd_item_wdata;
  logic [CLW-1:0] hd_ex_class, hd_nc_data, hd_num_classes, hd_train_class, class_id;
  logic [CA-1:0] hd_ex_chunk; logic [W-1:0] hd_ex_data;
  logic hd_train_start = 0, hd_train_stop = 0, hd_training, hd_committed, class_valid;
  logic [15:0] hd_train_frames;
  logic [SUMW-1:0] class_dist_sum; logic [FA:0] class_frames;

  hydrate_top #(.S(S), .N(N), .BUF_DEPTH(BUF_DEPTH), .PBUF_DEPTH(PBUF_DEPTH),
                .CP_DEPTH(CP_DEPTH), .N_L(N_L), .X_LEN(X_LEN), .H_LEN(H_LEN), .D(D),
                .W(W), .LEVELS(LEVELS), .C_MAX(C_MAX), .F(F)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ reference
  int wts  [S][PBUF_DEPTH][N];                      // NNPE weights (x64)
  int cb   [S][CP_DEPTH], csh [S][CP_DEPTH];        // NNPE channel parameters
  wcode_t lwc [H_LEN][4][ZW][N_L];                  // LSTM weight codes
  int lbias [4*H_LEN], lshift [4*H_LEN];
  int h_ref [H_LEN], c_ref [H_LEN];
  logic [D-1:0] P [K], L [LEVELS], E [C_MAX];
  int hdist [$][C_MAX];
  int nc_ref;

  // reference data of the frame in flight
  int lay_in [][];   // layer input, [word][lane]
  int lay_out [];    // layer output bytes
  int xg [];         // LSTM input
  int hng [];        // LSTM output

  // NNPE layer: lay_in -> lay_out
  function automatic void ref_layer(input int npix, input int m, input int stride,
                                    input int g, input int pbase, input int cpbase,
                                    input int act, input int cout);
    longint acc;
    lay_out = new[npix * cout];
    for (int gi = 0; gi < g; gi++)
      for (int p = 0; p < npix; p++)
        for (int s = 0; s < S; s++) begin
          acc = 0;
          for (int mm = 0; mm < m; mm++)
            for (int i = 0; i < N; i++)
              acc += longint'(lay_in[p*stride + mm][i]) * wts[s][pbase + gi*m + mm][i];
          lay_out[p*cout + gi*S + s] = ref_outfn(acc, cb[s][cpbase + gi], csh[s][cpbase + gi], act);
        end
  endfunction

  // LSTM step: xg -> hng, updating the reference h and c
  function automatic void ref_lstm();
    int z [ZW*N_L];
    int gates [4];
    longint acc;
    int cn, hv;
    hng = new[H_LEN];
    for (int i = 0; i < ZW*N_L; i++) z[i] = 0;
    for (int i = 0; i < X_LEN; i++) z[i] = xg[i];
    for (int i = 0; i < H_LEN; i++) z[X_LEN + i] = h_ref[i];
    for (int j = 0; j < H_LEN; j++) begin
      for (int q = 0; q < 4; q++) begin
        acc = 0;
        for (int mm = 0; mm < ZW; mm++)
          for (int i = 0; i < N_L; i++)
            acc += longint'(z[mm*N_L + i]) * ref_wfactor(lwc[j][q][mm][i]);
        gates[q] = ref_outfn(acc, lbias[q*H_LEN + j], lshift[q*H_LEN + j], (q == 2) ? 3 : 2);
      end
      ref_cell(gates[0], gates[1], gates[2], gates[3], c_ref[j], cn, hv);
      c_ref[j] = cn;
      hng[j] = hv;
    end
    for (int j = 0; j < H_LEN; j++) h_ref[j] = hng[j];
  endfunction

  // HD encoding of hng
  function automatic logic [D-1:0] ref_encode();
    logic [D-1:0] h;
    int c [D];
    for (int d = 0; d < D; d++) c[d] = 0;
    for (int k = 0; k < K; k++) begin
      logic [D-1:0] b = P[k] ^ L[(hng[k] + 128) >> (8 - LB)];
      for (int d = 0; d < D; d++) c[d] += b[d];
    end
    for (int d = 0; d < D; d++) h[d] = (2 * c[d] > K);
    return h;
  endfunction

  // expected results, in frame order
  int e_cls [$], e_sum [$], e_frm [$];
  int n_results = 0;
  always @(posedge clk)
    if (rst_n && class_valid) begin
      if (e_cls.size() == 0) check(0, "unexpected result");
      else begin
        check(int'(class_id) == e_cls[0],
              $sformatf("result %0d: class %0d, expected %0d", n_results, class_id, e_cls[0]));
        check(int'(class_dist_sum) == e_sum[0],
              $sformatf("result %0d: sum %0d, expected %0d", n_results, class_dist_sum, e_sum[0]));
        check(int'(class_frames) == e_frm[0],
              $sformatf("result %0d: frames %0d, expected %0d", n_results, class_frames, e_frm[0]));
        void'(e_cls.pop_front()); void'(e_sum.pop_front()); void'(e_frm.pop_front());
      end
      n_results++;
    end

  // ------------------------------------------------------- mechanism counters
  int m_swap = 0, m_xstall = 0, m_wstall = 0, m_steps = 0, m_seqrst = 0;
  int m_full = 0, m_commit = 0, m_grow = 0, m_overlap = 0;
  int m_act [4];
  initial for (int a = 0; a < 4; a++) m_act[a] = 0;
  logic sel_q = 0;
  logic [CLW-1:0] nc_q = '0;
  always @(posedge clk)
    if (rst_n) begin
      sel_q <= nn_buf_sel;
      nc_q  <= hd_num_classes;
      if (nn_buf_sel != sel_q) m_swap++;
      if (dut.x_valid && !dut.x_ready) m_xstall++;
      if (lstm_step_done) m_steps++;
      if (class_valid && int'(class_frames) == F) m_full++;
      if (hd_committed) m_commit++;
      if (hd_num_classes > nc_q && nc_q != '0) m_grow++;
      if (nn_busy && lstm_wt_ready) m_overlap++;
    end

  // LSTM kernel weights, streamed whenever the accelerator runs, with gaps
  initial begin
    int j, q, mm;
    j = 0; q = 0; mm = 0;
    forever begin
      @(negedge clk);
      if (lstm_busy) begin
        lstm_wt_valid = ($urandom_range(7) != 0);
        for (int i = 0; i < N_L; i++) lstm_wt_data[i] = lwc[j][q][mm][i];
        #1;
        if (!lstm_wt_valid && lstm_wt_ready) m_wstall++;
        @(posedge clk);
        if (lstm_wt_valid && lstm_wt_ready) begin
          mm++;
          if (mm == ZW) begin mm = 0; q++; end
          if (q == 4) begin q = 0; j = (j + 1) % H_LEN; end
        end
      end else lstm_wt_valid = 0;
    end
  end

  // x bytes accepted by the LSTM (end of a feature readout)
  int x_frames = 0;
  always @(posedge clk)
    if (rst_n && dut.x_valid && dut.x_ready && dut.x_last) x_frames++;

  task automatic nn_run(nnpe_desc_t d);
    @(negedge clk); nn_desc = d; nn_start = 1;
    @(negedge clk); nn_start = 0;
    while (!nn_done) @(negedge clk);
  endtask

  // ------------------------------------------------------------- stimulus
  initial begin
    nnpe_desc_t d1, d2;
    int img [][];
    logic [D-1:0] hv;
    logic [D-1:0] thv [$];
    int dd [C_MAX];
    int best, bsum, s, cnt, acts;

    // model
    for (int k = 0; k < K; k++) for (int w = 0; w < D / 32; w++) P[k][w*32 +: 32] = $urandom;
    for (int l = 0; l < LEVELS; l++) for (int w = 0; w < D / 32; w++) L[l][w*32 +: 32] = $urandom;
    for (int c = 0; c < C_MAX; c++) for (int w = 0; w < D / 32; w++) E[c][w*32 +: 32] = $urandom;
    for (int j = 0; j < H_LEN; j++) for (int q = 0; q < 4; q++)
      for (int mm = 0; mm < ZW; mm++) for (int i = 0; i < N_L; i++)
        lwc[j][q][mm][i] = wcode_t'($urandom);
    for (int j = 0; j < H_LEN; j++) begin h_ref[j] = 0; c_ref[j] = 0; end

    repeat (2) @(negedge clk);
    rst_n = 1;

    // NNPE weights and channel parameters
    for (int sc = 0; sc < S; sc++) begin
      for (int a = 0; a < G1*M1 + G2*M2; a++) begin
        @(negedge clk); pw_en = 1; pw_sel = SW'(sc); pw_addr = PAW'(a);
        for (int i = 0; i < N; i++) begin
          pw_data[i] = wcode_t'($urandom);
          wts[sc][a][i] = ref_wfactor(pw_data[i]);
        end
      end
      for (int a = 0; a < CP_DEPTH; a++) begin
        @(negedge clk); pw_en = 0; cw_en = 1; cw_sel = SW'(sc); cw_addr = CAW'(a);
        cw_data.shift = 5'(NN_SHIFT + $urandom_range(2));
        cw_data.bias  = 16'($urandom_range(40)) - 16'sd20;
        cb[sc][a] = int'(cw_data.bias); csh[sc][a] = int'(cw_data.shift);
      end
      @(negedge clk); cw_en = 0;
    end
    // LSTM gate-row parameters
    for (int a = 0; a < 4 * H_LEN; a++) begin
      @(negedge clk); lstm_cw_en = 1; lstm_cw_addr = LCW'(a);
      lstm_cw_data.shift = 5'(LSTM_SHIFT + $urandom_range(2));
      lstm_cw_data.bias  = 16'($urandom_range(60)) - 16'sd30;
      lbias[a] = int'(lstm_cw_data.bias); lshift[a] = int'(lstm_cw_data.shift);
    end
    @(negedge clk); lstm_cw_en = 0;
    // HD model: item memories, NC0 exemplars, class count
    for (int k = 0; k < K; k++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); hd_pos_we = 1; hd_pos_waddr = IPAW'(k*NCH + c); hd_item_wdata = P[k][c*W +: W];
    end
    @(negedge clk); hd_pos_we = 0;
    for (int l = 0; l < LEVELS; l++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); hd_lvl_we = 1; hd_lvl_waddr = ILAW'(l*NCH + c); hd_item_wdata = L[l][c*W +: W];
    end
    @(negedge clk); hd_lvl_we = 0;
    for (int cl = 0; cl < NC0; cl++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); hd_ex_we = 1; hd_ex_class = CLW'(cl); hd_ex_chunk = CA'(c); hd_ex_data = E[cl][c*W +: W];
    end
    @(negedge clk); hd_ex_we = 0; hd_nc_we = 1; hd_nc_data = CLW'(NC0);
    @(negedge clk); hd_nc_we = 0;
    nc_ref = NC0;
    while (lstm_busy) @(negedge clk);     // state clear after reset

    // layer descriptors
    d1 = '0;
    d1.in_base = 0; d1.pix_stride = 16'(M1); d1.n_pix = 16'(P1); d1.m_words = 8'(M1);
    d1.n_groups = 12'(G1); d1.cout = 16'(COUT1); d1.out_base = 0;
    d1.p_base = 0; d1.cp_base = 0; d1.act = ACT_RELU; d1.swap = 1;
    d2 = '0;
    d2.in_base = 0; d2.pix_stride = 16'(M2); d2.n_pix = 16'(P2); d2.m_words = 8'(M2);
    d2.n_groups = 12'(G2); d2.cout = 16'(G2 * S); d2.out_base = 0;
    d2.p_base = 16'(G1 * M1); d2.cp_base = 12'(CP2); d2.swap = 1;

    for (int f = 0; f < NF; f++) begin
      // ---- reference for frame f
      if (f == SEQ_RESET_AT)
        for (int j = 0; j < H_LEN; j++) begin h_ref[j] = 0; c_ref[j] = 0; end
      if (f == TRAIN_LAST + 1) begin
        for (int d = 0; d < D; d++) begin
          cnt = 0;
          foreach (thv[i]) cnt += thv[i][d];
          E[NC0][d] = (2 * cnt > thv.size());
        end
        nc_ref = NC0 + 1;
        hdist.delete();
      end
      acts = (f % 3 == 0) ? 0 : (f % 3 == 1) ? 2 : 3;    // layer 2: none, sigmoid, tanh
      d2.act = act_fn_e'(acts);
      img = new[IMG_WORDS];
      foreach (img[a]) begin
        img[a] = new[N];
        foreach (img[a][i]) img[a][i] = $urandom_range(255) - 128;
      end
      lay_in = img;
      ref_layer(P1, M1, M1, G1, 0, 0, 1, COUT1);
      lay_in = new[P1 * M2];
      foreach (lay_in[a]) begin
        lay_in[a] = new[N];
        foreach (lay_in[a][i]) lay_in[a][i] = lay_out[a*N + i];
      end
      ref_layer(P2, M2, M2, G2, G1 * M1, CP2, acts, G2 * S);
      xg = lay_out;
      ref_lstm();
      hv = ref_encode();
      if (f >= TRAIN_FIRST && f <= TRAIN_LAST) thv.push_back(hv);
      for (int c = 0; c < C_MAX; c++) dd[c] = $countones(hv ^ E[c]);
      hdist.push_back(dd);
      if (hdist.size() > F) void'(hdist.pop_front());
      best = 0; bsum = 0;
      for (int c = 0; c < nc_ref; c++) begin
        s = 0;
        foreach (hdist[i]) s += hdist[i][c];
        if (c == 0 || s < bsum) begin best = c; bsum = s; end
      end
      e_cls.push_back(best); e_sum.push_back(bsum); e_frm.push_back(hdist.size());

      // ---- drive frame f
      while (x_frames < f) @(negedge clk);   // input buffer free again
      for (int a = 0; a < IMG_WORDS; a++) begin
        @(negedge clk); dw_en = 1; dw_addr = BAW'(a);
        for (int i = 0; i < N; i++) dw_data[i] = act_t'(img[a][i]);
      end
      @(negedge clk); dw_en = 0;
      nn_run(d1);
      nn_run(d2);
      m_act[1]++; m_act[acts]++;
      if (f >= SEQ_FROM) begin
        while (n_results < f) @(negedge clk);
        if (f == SEQ_RESET_AT) begin
          @(negedge clk); lstm_seq_reset = 1;
          @(negedge clk); lstm_seq_reset = 0;
          while (lstm_busy) @(negedge clk);
          m_seqrst++;
        end
        if (f == TRAIN_FIRST) begin
          @(negedge clk); hd_train_start = 1; hd_train_class = CLW'(NC0);
          @(negedge clk); hd_train_start = 0;
          while (!hd_training) @(negedge clk);
        end
        if (f == TRAIN_LAST + 1) begin
          check(int'(hd_train_frames) == TRAIN_LAST - TRAIN_FIRST + 1, "training frame count");
          @(negedge clk); hd_train_stop = 1;
          @(negedge clk); hd_train_stop = 0;
          while (m_commit == 0) @(negedge clk);
          @(negedge clk);
          check(int'(hd_num_classes) == NC0 + 1, "class count grew");
        end
      end
      @(negedge clk); feat_start = 1; feat_base = '0;
      @(negedge clk); feat_start = 0;
    end
    while (n_results < NF) @(negedge clk);
    repeat (20) @(negedge clk);
    check(e_cls.size() == 0, "all results seen");

    $display("mechanisms: buffer_swaps=%0d readout_stalls=%0d weight_stalls=%0d lstm_steps=%0d",
             m_swap, m_xstall, m_wstall, m_steps);
    $display("mechanisms: nnpe_lstm_overlap=%0d seq_resets=%0d results=%0d full_windows=%0d",
             m_overlap, m_seqrst, n_results, m_full);
    $display("mechanisms: commits=%0d class_growth=%0d relu=%0d none=%0d sigmoid=%0d tanh=%0d",
             m_commit, m_grow, m_act[1], m_act[0], m_act[2], m_act[3]);
    check(m_swap == 2 * NF, "buffer swaps");
    check(m_xstall > 0, "NNPE readout held back by a busy LSTM");
    check(m_wstall > 0, "LSTM weight stream stalls");
    check(m_steps == NF, "LSTM steps");
    check(m_overlap > 0, "NNPE and LSTM working at once");
    check(m_seqrst > 0, "LSTM sequence reset");
    check(n_results == NF, "HD results");
    check(m_full > (NF > F ? 1 : 0) || NF < F, "sliding window filled and slid");
    check(m_commit == 1, "reconfiguration commit");
    check(m_grow == 1, "class count grew by the commit");
    check(m_act[0] > 0 && m_act[1] > 0 && m_act[2] > 0 && m_act[3] > 0, "all output functions used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
