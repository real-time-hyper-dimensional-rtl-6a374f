// tb_hd_item_mem: loads random position and level vectors and checks that
// every lookup returns P[k][c] ^ L[lvl][c] one cycle later.
module tb_hd_item_mem;
  localparam int D = 64, W = 16, K = 8, LEVELS = 16, NCH = D / W;
  logic clk = 0, rst_n = 0;
  logic pos_we = 0, lvl_we = 0, rd_en = 0, bound_valid;
  logic [4:0] pos_waddr; logic [5:0] lvl_waddr;
  logic [W-1:0] wdata, bound;
  logic [2:0] rd_k; logic [3:0] rd_lvl; logic [1:0] rd_c;
  logic [W-1:0] P [K][NCH], L [LEVELS][NCH];
  int checks = 0, failures = 0;

  hd_item_mem #(.D(D), .W(W), .K(K), .LEVELS(LEVELS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] e;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); pos_we = 1; pos_waddr = 5'(k*NCH + c); wdata = W'($urandom); P[k][c] = wdata;
    end
    @(negedge clk); pos_we = 0;
    for (int l = 0; l < LEVELS; l++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); lvl_we = 1; lvl_waddr = 6'(l*NCH + c); wdata = W'($urandom); L[l][c] = wdata;
    end
    @(negedge clk); lvl_we = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      rd_en = 1; rd_k = 3'($urandom); rd_lvl = 4'($urandom); rd_c = 2'($urandom);
      e = P[rd_k][rd_c] ^ L[rd_lvl][rd_c];
      @(negedge clk);
      rd_en = 0;
      checks += 2;
      if (!bound_valid) begin failures++; $display("FAIL valid"); end
      if (bound !== e) begin failures++; $display("FAIL bound %h exp %h", bound, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
