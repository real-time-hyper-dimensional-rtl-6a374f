// tb_lstm_cell: random gates and cell states through the LSTM cell update,
// one per cycle, compared with a reference (saturating cases first); also
// checks the latency (input in cycle c, result in cycle c + 3) and that the
// index travels with the data.
module tb_lstm_cell;
  import hyd_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic [8:0] in_idx, out_idx;
  act_t gi, gf, gg, go, h;
  logic signed [15:0] c_old, c_new;
  int checks = 0, failures = 0, cyc = 0;
  int eq_c[$], eq_h[$], eq_i[$], eq_t[$];

  lstm_cell dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && out_valid) begin
    int ec, eh, ei, et;
    ec = eq_c.pop_front(); eh = eq_h.pop_front();
    ei = eq_i.pop_front(); et = eq_t.pop_front();
    checks += 3;
    if (int'(c_new) != ec) begin failures++; $display("FAIL c %0d exp %0d", c_new, ec); end
    if (int'(h) != eh)     begin failures++; $display("FAIL h %0d exp %0d", h, eh); end
    if (int'(out_idx) != ei || cyc - et != 2) begin
      failures++; $display("FAIL idx/latency %0d %0d", out_idx, cyc - et);
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ec, eh;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      gi = act_t'($urandom_range(127)); gf = act_t'($urandom_range(127));
      go = act_t'($urandom_range(127)); gg = act_t'($urandom);
      c_old = 16'($urandom) >>> $urandom_range(15);
      if (t < 20) begin gf = 127; gi = 127; gg = (t % 2) ? 8'sd127 : -8'sd128; c_old = (t % 2) ? 16'sh7fff : 16'sh8000; end
      in_idx = 9'(t);
      in_valid = 1;
      ref_cell(gi, gf, gg, go, c_old, ec, eh);
      eq_c.push_back(ec); eq_h.push_back(eh); eq_i.push_back(t % 512); eq_t.push_back(cyc + 1);
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (eq_c.size() != 0) begin failures++; $display("FAIL lost results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
