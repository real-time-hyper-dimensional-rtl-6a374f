// enc_env: drives one hd_encoder instance for tb_hd_encoder and checks its
// output against a reference majority vote.
module enc_env
  import hyd_pkg::*;
#(
  parameter int K = 9
) (
  input  logic clk,
  input  logic rst_n,
  input  int   cyc,
  input  int   chk_n,
  output logic done
);
  localparam int D = 64, W = 16, LEVELS = 16, NCH = D / W;
  localparam int PAW = $clog2(K * NCH), LAW = $clog2(LEVELS * NCH);

  logic pos_we = 0, lvl_we = 0;
  logic [PAW-1:0] pos_waddr; logic [LAW-1:0] lvl_waddr;
  logic [W-1:0] item_wdata;
  logic feat_valid = 0, feat_ready; act_t feat_data;
  logic hv_valid, hv_ready = 0, hv_last;
  logic [W-1:0] hv_chunk; logic [1:0] hv_idx;

  hd_encoder #(.D(D), .W(W), .K(K), .LEVELS(LEVELS)) dut (.*);

  logic [D-1:0] P [K], L [LEVELS];
  int checks = 0, fails = 0, ties = 0, stalls = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin fails++; $display("FAIL K=%0d %s", K, what); end
  endtask

  initial begin
    int v [K];
    logic [D-1:0] ref_hv;
    int cnt, got, t_prev;
    bit free_run;
    done = 0;
    for (int k = 0; k < K; k++) P[k] = {$urandom, $urandom};
    for (int l = 0; l < LEVELS; l++) L[l] = {$urandom, $urandom};
    wait (rst_n);
    for (int k = 0; k < K; k++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); pos_we = 1; pos_waddr = PAW'(k*NCH + c); item_wdata = P[k][c*W +: W];
    end
    @(negedge clk); pos_we = 0;
    for (int l = 0; l < LEVELS; l++) for (int c = 0; c < NCH; c++) begin
      @(negedge clk); lvl_we = 1; lvl_waddr = LAW'(l*NCH + c); item_wdata = L[l][c*W +: W];
    end
    @(negedge clk); lvl_we = 0;
    for (int f = 0; f < 6; f++) begin
      free_run = (f == 5);
      for (int k = 0; k < K; k++) v[k] = $urandom_range(255) - 128;
      for (int d = 0; d < D; d++) begin
        cnt = 0;
        for (int k = 0; k < K; k++) cnt += P[k][d] ^ L[(v[k] + 128) >> 4][d];
        if (2 * cnt == K) ties++;
        ref_hv[d] = (2 * cnt > K);
      end
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        feat_valid = 1; feat_data = act_t'(v[k]);
        @(posedge clk);
        while (!feat_ready) @(posedge clk);
      end
      @(negedge clk); feat_valid = 0;
      got = 0; t_prev = cyc;
      while (got < NCH) begin
        @(negedge clk);
        hv_ready = free_run || ($urandom_range(2) != 0);
        #1;
        if (hv_valid && !hv_ready) stalls++;
        @(posedge clk);
        if (hv_valid && hv_ready) begin
          check(hv_idx == 2'(got), "chunk index");
          check(hv_chunk == ref_hv[got*W +: W],
                $sformatf("frame %0d chunk %0d: %h, expected %h", f, got, hv_chunk, ref_hv[got*W +: W]));
          check(hv_last == (got == NCH - 1), "hv_last");
          if (free_run && got > 0)
            check(cyc - t_prev == K + 2, $sformatf("chunk time %0d", cyc - t_prev));
          t_prev = cyc;
          got++;
        end
      end
      @(negedge clk); hv_ready = 0;
    end
    done = 1;
  end
endmodule
