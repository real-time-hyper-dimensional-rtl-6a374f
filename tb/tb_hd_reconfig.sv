// tb_hd_reconfig: checks the reconfiguration encoder at a reduced size
// (D = 64 in chunks of 16).
//
// Three training episodes on the hypervector stream:
//   1. start before any frame, 5 frames, stop between frames;
//   2. start in the middle of a frame (that frame must be skipped), 3 whole
//      frames, stop in the middle of a 4th frame (the stop must wait for its
//      last chunk), so 4 frames with ties that must go to 0;
//   3. start and stop with no frames: nothing may be written.
// The exemplar writes are captured and compared with a reference majority
// of the frames that should have been counted; `frames` and `committed` are
// checked too.
module tb_hd_reconfig;
  localparam int D = 64, W = 16, C_MAX = 7, NCH = D / W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic train_start = 0, train_stop = 0;
  logic [2:0] train_class;
  logic hv_valid = 0, hv_ready, hv_last;
  logic [W-1:0] hv_chunk; logic [1:0] hv_idx;
  logic ex_we; logic [2:0] ex_class; logic [1:0] ex_chunk; logic [W-1:0] ex_data;
  logic training, committed; logic [15:0] frames;

  hd_reconfig #(.D(D), .W(W), .C_MAX(C_MAX), .TW(16)) dut (.*);

  int checks = 0, failures = 0, n_commit = 0;
  int w_cls [$], w_chk [$];
  logic [W-1:0] w_dat [$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk)
    if (rst_n) begin
      if (ex_we) begin w_cls.push_back(ex_class); w_chk.push_back(ex_chunk); w_dat.push_back(ex_data); end
      if (committed) n_commit++;
    end

  // send chunks lo..hi of a frame
  task automatic send(logic [D-1:0] hv, int lo, int hi);
    for (int k = lo; k <= hi; k++) begin
      // hv_valid marks a transferred beat, so it is only raised with hv_ready
      @(negedge clk);
      while (!hv_ready) @(negedge clk);
      hv_valid = 1; hv_chunk = hv[k*W +: W]; hv_idx = 2'(k); hv_last = (k == NCH - 1);
      @(negedge clk); hv_valid = 0;
    end
  endtask

  task automatic pulse_start(int cls);
    @(negedge clk); train_start = 1; train_class = 3'(cls);
    @(negedge clk); train_start = 0;
  endtask

  task automatic pulse_stop();
    @(negedge clk); train_stop = 1;
    @(negedge clk); train_stop = 0;
  endtask

  task automatic expect_commit(int cls, logic [D-1:0] hvs [$], int nfr);
    int cnt;
    logic [D-1:0] e;
    repeat (NCH + 4) @(negedge clk);
    check(frames == 16'(nfr), $sformatf("frames %0d, expected %0d", frames, nfr));
    for (int d = 0; d < D; d++) begin
      cnt = 0;
      foreach (hvs[i]) cnt += hvs[i][d];
      e[d] = (2 * cnt > nfr);
    end
    check(w_cls.size() == NCH, $sformatf("%0d exemplar writes", w_cls.size()));
    for (int k = 0; k < NCH && w_cls.size() > 0; k++) begin
      check(w_cls[0] == cls, "write class");
      check(w_chk[0] == k, "write chunk order");
      check(w_dat[0] == e[k*W +: W], $sformatf("chunk %0d %h, expected %h", k, w_dat[0], e[k*W +: W]));
      void'(w_cls.pop_front()); void'(w_chk.pop_front()); void'(w_dat.pop_front());
    end
    check(!training, "training ended");
  endtask

  initial begin
    logic [D-1:0] hv, base;
    logic [D-1:0] hvs [$];
    int ties;
    repeat (2) @(negedge clk);
    rst_n = 1;
    base = {$urandom, $urandom};
    // frames outside training are ignored
    send({$urandom, $urandom}, 0, NCH - 1);
    // episode 1
    pulse_start(5);
    repeat (NCH + 1) @(negedge clk);
    check(training, "training after start");
    hvs.delete();
    for (int f = 0; f < 5; f++) begin
      hv = base ^ {$urandom, $urandom} & {$urandom, $urandom};
      hvs.push_back(hv); send(hv, 0, NCH - 1);
    end
    check(frames == 5, "frames counted");
    pulse_stop();
    expect_commit(5, hvs, 5);
    check(n_commit == 1, "one commit");
    // episode 2: start mid-frame
    hv = {$urandom, $urandom};
    send(hv, 0, 1);
    pulse_start(2);
    send(hv, 2, NCH - 1);       // rest of the skipped frame
    hvs.delete();
    for (int f = 0; f < 3; f++) begin
      hv = {$urandom, $urandom};
      hvs.push_back(hv); send(hv, 0, NCH - 1);
    end
    hv = {$urandom, $urandom};
    hvs.push_back(hv);
    send(hv, 0, 1);
    pulse_stop();
    repeat (3) @(negedge clk);
    check(training && w_cls.size() == 0, "stop deferred to frame end");
    send(hv, 2, NCH - 1);
    ties = 0;
    for (int d = 0; d < D; d++) begin
      int c = 0;
      foreach (hvs[i]) c += hvs[i][d];
      if (2 * c == 4) ties++;
    end
    expect_commit(2, hvs, 4);
    check(n_commit == 2, "second commit");
    // episode 3: empty
    pulse_start(6);
    repeat (NCH + 2) @(negedge clk);
    pulse_stop();
    repeat (NCH + 4) @(negedge clk);
    check(w_cls.size() == 0 && n_commit == 2 && !training, "empty episode writes nothing");
    $display("mechanisms: commits=%0d ties=%0d", n_commit, ties);
    check(ties > 0, "ties exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
