// tb_sacc_outfn: checks batch-norm scaling, bias, saturation, ReLU, sigmoid
// and tanh of the output functions against a reference, with one new input
// per cycle and a one-cycle latency.
module tb_sacc_outfn;
  import hyd_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic signed [31:0] acc;
  chan_param_t cp;
  act_fn_e act;
  act_t y;
  int checks = 0, failures = 0;
  int expq[$];
  int seen[4] = '{0, 0, 0, 0};

  sacc_outfn dut (.*);
  always #5 clk = ~clk;

  always @(negedge clk) if (rst_n && out_valid) begin
    int e;
    e = expq.pop_front();
    checks++;
    if (int'(y) != e) begin
      failures++;
      $display("FAIL y=%0d exp=%0d", y, e);
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      acc = $signed($urandom) >>> $urandom_range(31);
      cp.shift = 5'($urandom_range(20));
      cp.bias  = 16'($urandom) >>> $urandom_range(15);
      a = $urandom_range(3);
      act = act_fn_e'(a);
      seen[a]++;
      in_valid = 1;
      expq.push_back(ref_outfn(longint'(acc), int'(cp.bias), int'(cp.shift), a));
      if ($urandom_range(3) == 0) begin
        @(negedge clk);
        in_valid = 0;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL lost results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
