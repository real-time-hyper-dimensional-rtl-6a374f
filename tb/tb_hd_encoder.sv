// tb_hd_encoder: encodes random frames at a reduced size (D = 64 in chunks
// of 16, K = 9 features so that ties cannot happen, then K = 8 in a second
// instance where they can) and compares every hypervector chunk with a
// reference majority vote of P[k] ^ L[level(v_k)]. Back-pressure on the
// chunk stream is random except in the last frame, where the time per chunk
// is checked against K + 2 cycles.
module tb_hd_encoder;
  import hyd_pkg::*;
  localparam int D = 64, W = 16, LEVELS = 16, NCH = D / W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int checks = 0, failures = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // two instances: odd and even K
  logic        done9 = 0, done8 = 0;
  enc_env #(.K(9)) e9 (.clk, .rst_n, .cyc, .chk_n(checks), .done(done9));
  enc_env #(.K(8)) e8 (.clk, .rst_n, .cyc, .chk_n(checks), .done(done8));

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (done9 && done8);
    failures = e9.fails + e8.fails;
    checks   = e9.checks + e8.checks;
    $display("mechanisms: ties_seen=%0d hv_stalls=%0d", e8.ties, e9.stalls + e8.stalls);
    if (e8.ties == 0) begin failures++; $display("FAIL no tie exercised"); end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
