// tb_hd_classifier: inference and on-device reconfiguration together, at a
// reduced size (D = 64 in chunks of 16, K = 8 features, 16 levels, up to 7
// classes, a 4-frame window).
//
// The host loads random item memories and 3 class exemplars and sets the
// class count. Random feature frames are then classified and compared with
// a reference model (encoding by majority of P[k] ^ L[level], Hamming
// distances, window sums over the last F frames, arg-min). Midway, class 3
// is trained from 3 frames while inference keeps running; after the stop,
// the reference exemplar is the majority of those frames, the class count
// must grow to 4, and the window restarts. A host window clear is also
// exercised. Feature bytes are sent with random gaps.
module tb_hd_classifier;
  import hyd_pkg::*;
  localparam int D = 64, W = 16, K = 8, LEVELS = 16, C_MAX = 7, F = 4, NCH = D / W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pos_we = 0, lvl_we = 0, ex_we = 0, nc_we = 0, win_clear = 0;
  logic [4:0] pos_waddr; logic [5:0] lvl_waddr; logic [W-1:0] item_wdata;
  logic [2:0] ex_class, nc_data, num_classes; logic [1:0] ex_chunk; logic [W-1:0] ex_data;
  logic train_start = 0, train_stop = 0, training, committed;
  logic [2:0] train_class; logic [15:0] train_frames;
  logic feat_valid = 0, feat_ready; act_t feat_data;
  logic res_valid; logic [2:0] res_class; logic [8:0] res_sum; logic [2:0] res_frames;

  hd_classifier #(.D(D), .W(W), .K(K), .LEVELS(LEVELS), .C_MAX(C_MAX), .F(F), .TW(16))
    dut (.*);

  logic [D-1:0] P [K], L [LEVELS], E [C_MAX];
  int hdist [$][C_MAX];
  int nc_ref;
  int checks = 0, failures = 0, n_results = 0, n_commit = 0;
  int r_cls [$], r_sum [$], r_frm [$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk)
    if (rst_n) begin
      if (res_valid) begin
        r_cls.push_back(res_class); r_sum.push_back(res_sum); r_frm.push_back(res_frames);
      end
      if (committed) n_commit++;
    end

  function automatic logic [D-1:0] encode(int v [K]);
    logic [D-1:0] h;
    int c;
    for (int d = 0; d < D; d++) begin
      c = 0;
      for (int k = 0; k < K; k++) c += P[k][d] ^ L[(v[k] + 128) >> 4][d];
      h[d] = (2 * c > K);
    end
    return h;
  endfunction

  // send one frame, check its result against the reference; returns the hv
  task automatic frame(output logic [D-1:0] hv);
    int v [K];
    int dd [C_MAX];
    int best, bsum, s;
    for (int k = 0; k < K; k++) v[k] = $urandom_range(255) - 128;
    hv = encode(v);
    for (int c = 0; c < C_MAX; c++) dd[c] = $countones(hv ^ E[c]);
    hdist.push_back(dd);
    if (hdist.size() > F) void'(hdist.pop_front());
    best = 0; bsum = 0;
    for (int c = 0; c < nc_ref; c++) begin
      s = 0;
      foreach (hdist[i]) s += hdist[i][c];
      if (c == 0 || s < bsum) begin best = c; bsum = s; end
    end
    for (int k = 0; k < K; k++) begin
      @(negedge clk);
      while ($urandom_range(3) == 0) @(negedge clk);
      feat_valid = 1; feat_data = act_t'(v[k]);
      @(posedge clk);
      while (!feat_ready) @(posedge clk);
      @(negedge clk); feat_valid = 0;
    end
    while (r_cls.size() == 0) @(negedge clk);
    check(r_cls[0] == best, $sformatf("class %0d, expected %0d", r_cls[0], best));
    check(r_sum[0] == bsum, $sformatf("sum %0d, expected %0d", r_sum[0], bsum));
    check(r_frm[0] == hdist.size(), $sformatf("frames %0d, expected %0d", r_frm[0], hdist.size()));
    void'(r_cls.pop_front()); void'(r_sum.pop_front()); void'(r_frm.pop_front());
    n_results++;
  endtask

  initial begin
    logic [D-1:0] hv;
    logic [D-1:0] thv [$];
    int cnt;
    for (int k = 0; k < K; k++) P[k] = {$urandom, $urandom};
    for (int l = 0; l < LEVELS; l++) L[l] = {$urandom, $urandom};
    for (int c = 0; c < C_MAX; c++) E[c] = {$urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); pos_we = 1; pos_waddr = 5'(k*NCH + c); item_wdata = P[k][c*W +: W];
    end
    @(negedge clk); pos_we = 0;
    for (int l = 0; l < LEVELS; l++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); lvl_we = 1; lvl_waddr = 6'(l*NCH + c); item_wdata = L[l][c*W +: W];
    end
    @(negedge clk); lvl_we = 0;
    for (int c = 0; c < 3; c++) for (int k = 0; k < NCH; k++) begin
      @(negedge clk); ex_we = 1; ex_class = 3'(c); ex_chunk = 2'(k); ex_data = E[c][k*W +: W];
    end
    @(negedge clk); ex_we = 0; nc_we = 1; nc_data = 3;
    @(negedge clk); nc_we = 0;
    nc_ref = 3;
    // inference
    for (int f = 0; f < 6; f++) frame(hv);
    // host window clear
    @(negedge clk); win_clear = 1;
    @(negedge clk); win_clear = 0;
    hdist.delete();
    for (int f = 0; f < 2; f++) frame(hv);
    // train class 3 from three frames while inference runs
    @(negedge clk); train_start = 1; train_class = 3;
    @(negedge clk); train_start = 0;
    repeat (NCH + 1) @(negedge clk);
    check(training, "training");
    for (int f = 0; f < 3; f++) begin frame(hv); thv.push_back(hv); end
    check(train_frames == 3, $sformatf("train_frames %0d", train_frames));
    @(negedge clk); train_stop = 1;
    @(negedge clk); train_stop = 0;
    repeat (NCH + 3) @(negedge clk);
    check(n_commit == 1, "commit");
    check(num_classes == 4, $sformatf("num_classes %0d", num_classes));
    for (int d = 0; d < D; d++) begin
      cnt = 0;
      foreach (thv[i]) cnt += thv[i][d];
      E[3][d] = (2 * cnt > 3);
    end
    nc_ref = 4;
    hdist.delete();
    for (int f = 0; f < 6; f++) frame(hv);
    $display("mechanisms: results=%0d commits=%0d", n_results, n_commit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
