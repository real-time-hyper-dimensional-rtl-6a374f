// tb_sacc_vector: checks the N-wide shift-accumulate vector.
//
// Random dot products of 1 to 6 beats, issued back to back and with gaps,
// are compared with an integer-multiply reference (two all-extreme cases
// first, to exercise the accumulator width). Also checks the latency: a
// beat presented in cycle c gives `done` in cycle c + 2.
// Inputs change on the falling edge; outputs are checked on the rising edge.
module tb_sacc_vector;
  import hyd_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 256;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0, last = 0;
  act_t   [N-1:0] data;
  wcode_t [N-1:0] wcode;
  logic done;
  logic signed [31:0] acc;
  int checks = 0, failures = 0;
  int cyc = 0;

  sacc_vector #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  longint expq[$];
  int     last_cyc[$];

  // checker: sample just before the rising edge
  always @(negedge clk) if (rst_n && done) begin
    longint e;
    int lc;
    e  = expq.pop_front();
    lc = last_cyc.pop_front();
    checks++;
    if (acc !== 32'(e)) begin
      failures++;
      $display("FAIL acc=%0d exp=%0d", acc, e);
    end
    checks++;
    if (cyc - lc != 1) begin
      failures++;
      $display("FAIL latency %0d", cyc - lc);
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m;
    longint sum;
    data = '0; wcode = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int t = 0; t < 80; t++) begin
      m   = 1 + $urandom_range(5);
      sum = 0;
      for (int b = 0; b < m; b++) begin
        for (int i = 0; i < N; i++) begin
          data[i]  = act_t'($urandom);
          wcode[i] = wcode_t'($urandom);
          if (t < 2) begin data[i] = (t == 0) ? 8'sd127 : -8'sd128; wcode[i] = 4'h0; end
          sum += longint'(data[i]) * ref_wfactor(wcode[i]);
        end
        in_valid = 1; first = (b == 0); last = (b == m - 1);
        // presented in cycle cyc + 1 as the checker counts (cyc ticks next edge)
        if (b == m - 1) begin expq.push_back(sum); last_cyc.push_back(cyc + 1); end
        @(negedge clk);
      end
      in_valid = 0; first = 0; last = 0;
      if ($urandom_range(1) == 1) repeat ($urandom_range(3)) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
