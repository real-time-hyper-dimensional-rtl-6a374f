// tb_dp_ram: random writes with byte enables and reads, compared with a
// model; checks the one-cycle read latency and that a read of the word
// being written returns the old contents.
module tb_dp_ram;
  localparam int W = 64, DEPTH = 32;
  logic clk = 0;
  logic we = 0;
  logic [4:0] waddr, raddr;
  logic [7:0] wbe;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  dp_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] expv;
    // fill every word
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 5'(a); wbe = '1; wdata = {$urandom, $urandom};
      model[a] = wdata;
    end
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      we = $urandom_range(1); waddr = 5'($urandom); wbe = 8'($urandom);
      wdata = {$urandom, $urandom};
      raddr = ($urandom_range(3) == 0) ? waddr : 5'($urandom);
      expv = model[raddr];          // old contents, even if written now
      if (we)
        for (int b = 0; b < 8; b++) if (wbe[b]) model[waddr][b*8 +: 8] = wdata[b*8 +: 8];
      @(negedge clk);
      we = 0;
      checks++;
      if (rdata !== expv) begin
        failures++;
        $display("FAIL addr %0d: %h exp %h", raddr, rdata, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
