// tb_hd_search: checks the exemplar search at a reduced size (D = 64 in
// chunks of 16, up to 7 classes, a 4-frame window).
//
// Random exemplars are written, with class 3 a copy of class 1 so that the
// lowest-index tie rule is exercised. Frame hypervectors are noisy copies of
// a random class. A reference model keeps the per-frame Hamming distances of
// the frames since the last window clear and, for every frame, computes the
// sum over the last F of them, the arg-min (lowest class on ties) and the
// frame count. The window is cleared twice during the run and the number of
// active classes changes once (with a clear).
module tb_hd_search;
  localparam int D = 64, W = 16, C_MAX = 7, F = 4, NCH = D / W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [2:0] num_classes = 5;
  logic win_clear = 0, ex_we = 0;
  logic [2:0] ex_class; logic [1:0] ex_chunk; logic [W-1:0] ex_data;
  logic hv_valid = 0, hv_ready, hv_last;
  logic [W-1:0] hv_chunk; logic [1:0] hv_idx;
  logic res_valid; logic [2:0] res_class; logic [8:0] res_sum; logic [2:0] res_frames;

  hd_search #(.D(D), .W(W), .C_MAX(C_MAX), .F(F)) dut (.*);

  int checks = 0, failures = 0;
  int n_ties = 0, n_full = 0, n_clear = 0;
  logic [D-1:0] E [C_MAX];
  int hdist [$][C_MAX];     // distances of frames since the last clear

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // captured results
  int r_cls [$], r_sum [$], r_frm [$];
  always @(posedge clk)
    if (rst_n && res_valid) begin
      r_cls.push_back(res_class); r_sum.push_back(res_sum); r_frm.push_back(res_frames);
    end

  initial begin
    logic [D-1:0] hv;
    int dd [C_MAX];
    int best, bsum, s, nf, tgt;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < C_MAX; c++) E[c] = {$urandom, $urandom};
    E[3] = E[1];
    for (int c = 0; c < C_MAX; c++) for (int k = 0; k < NCH; k++) begin
      @(negedge clk); ex_we = 1; ex_class = 3'(c); ex_chunk = 2'(k); ex_data = E[c][k*W +: W];
    end
    @(negedge clk); ex_we = 0;
    for (int f = 0; f < 30; f++) begin
      if (f == 9 || f == 20) begin
        @(negedge clk); win_clear = 1;
        if (f == 20) num_classes = 7;
        @(negedge clk); win_clear = 0;
        hdist.delete(); n_clear++;
      end
      tgt = $urandom_range(int'(num_classes) - 1);
      hv = E[tgt];
      for (int b = 0; b < 12; b++) hv[$urandom_range(D - 1)] ^= 1'b1;
      for (int c = 0; c < C_MAX; c++) dd[c] = $countones(hv ^ E[c]);
      hdist.push_back(dd);
      if (hdist.size() > F) void'(hdist.pop_front());
      // reference result
      nf = hdist.size();
      best = 0; bsum = 0;
      for (int c = 0; c < int'(num_classes); c++) begin
        s = 0;
        foreach (hdist[i]) s += hdist[i][c];
        if (c == 0 || s < bsum) begin best = c; bsum = s; end
        else if (s == bsum) n_ties++;
      end
      if (nf == F) n_full++;
      // send the chunks
      for (int k = 0; k < NCH; k++) begin
        @(negedge clk);
        while ($urandom_range(3) == 0) @(negedge clk);
        hv_valid = 1; hv_chunk = hv[k*W +: W]; hv_idx = 2'(k); hv_last = (k == NCH - 1);
        @(posedge clk);
        while (!hv_ready) @(posedge clk);
        @(negedge clk); hv_valid = 0;
      end
      // wait for the result
      while (r_cls.size() == 0) @(negedge clk);
      check(r_cls[0] == best, $sformatf("frame %0d class %0d, expected %0d", f, r_cls[0], best));
      check(r_sum[0] == bsum, $sformatf("frame %0d sum %0d, expected %0d", f, r_sum[0], bsum));
      check(r_frm[0] == nf,   $sformatf("frame %0d frames %0d, expected %0d", f, r_frm[0], nf));
      void'(r_cls.pop_front()); void'(r_sum.pop_front()); void'(r_frm.pop_front());
    end
    repeat (20) @(negedge clk);
    check(r_cls.size() == 0, "no extra results");
    $display("mechanisms: ties=%0d full_windows=%0d clears=%0d", n_ties, n_full, n_clear);
    check(n_ties > 0 && n_full > 0 && n_clear == 2, "all mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
