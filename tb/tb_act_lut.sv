// tb_act_lut: checks every entry of the sigmoid and tanh tables against
// values computed with $exp, and the one-cycle read latency.
module tb_act_lut;
  import hyd_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0;
  act_t x, y;
  logic sel_tanh;
  int checks = 0, failures = 0;

  act_lut dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < 256; a++) begin
        @(negedge clk);
        x = act_t'(a); sel_tanh = s[0];
        @(negedge clk);          // one rising edge later the value is out
        e = s ? ref_tanh(int'(act_t'(a))) : ref_sigmoid(int'(act_t'(a)));
        checks++;
        if (int'(y) != e) begin
          failures++;
          $display("FAIL %s(%0d) = %0d, expected %0d", s ? "tanh" : "sigmoid",
                   int'(act_t'(a)), y, e);
        end
      end
    // spot values: sigmoid(0) = 0.5, tanh(0) = 0, saturation at the ends
    @(negedge clk); x = 0; sel_tanh = 0; @(negedge clk);
    checks++; if (y != 8'sd64) failures++;
    x = -8'sd128; sel_tanh = 1; @(negedge clk);
    checks++; if (y != -8'sd128) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
