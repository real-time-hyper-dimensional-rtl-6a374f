// tb_nnpe: runs two small layers through the NNPE and checks every output.
//
// Layer 1: 5 output pixels, M = 2 input words per dot product, 4 groups of S
// output channels, ReLU, buffers swapped afterwards. Layer 2 reads layer 1's
// result from the (swapped) input buffer and is split into two runs of one
// channel group each (group_base, p_base and cp_base differ), sigmoid, swap
// only after the second run. Each result is read out through the byte
// stream with random back-pressure and compared with a reference computed
// here from the same random weights. The run time is checked against
// groups * pixels * M + 6 cycles (start in cycle c, done in c + that).
module tb_nnpe;
  import hyd_pkg::*;
  import tb_ref_pkg::*;

  localparam int S = 4, N = 16, BUF_DEPTH = 64, PBUF_DEPTH = 32, CP_DEPTH = 16;

  logic clk = 0, rst_n = 0;
  logic dw_en = 0; logic [5:0] dw_addr; act_t [N-1:0] dw_data;
  logic pw_en = 0; logic [1:0] pw_sel; logic [4:0] pw_addr; wcode_t [N-1:0] pw_data;
  logic cw_en = 0; logic [1:0] cw_sel; logic [3:0] cw_addr; chan_param_t cw_data;
  logic start = 0; nnpe_desc_t desc; logic busy, done, buf_sel;
  logic ro_start = 0; logic [5:0] ro_base; logic [23:0] ro_len;
  logic ro_valid, ro_ready = 0, ro_last; act_t ro_data;

  nnpe #(.S(S), .N(N), .BUF_DEPTH(BUF_DEPTH), .PBUF_DEPTH(PBUF_DEPTH),
         .CP_DEPTH(CP_DEPTH)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  int stalls = 0, swaps = 0;

  // reference copies of what is loaded
  int inbuf [BUF_DEPTH][N];
  int wts   [S][PBUF_DEPTH][N];
  int cbias [S][CP_DEPTH], cshift [S][CP_DEPTH];
  int expect_bytes [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(nnpe_desc_t d_in);
    int t0, tn;
    @(negedge clk);
    desc = d_in; start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    tn = int'(d_in.n_groups) * int'(d_in.n_pix) * int'(d_in.m_words);
    check(cyc - t0 == tn + 6, $sformatf("run time %0d, expected %0d", cyc - t0, tn + 6));
  endtask

  // reference for one run: appends to a byte image of the output buffer
  task automatic ref_run(nnpe_desc_t d, ref int ob [BUF_DEPTH*N]);
    longint acc;
    int g, c, a;
    for (int gi = 0; gi < d.n_groups; gi++)
      for (int p = 0; p < d.n_pix; p++)
        for (int s = 0; s < S; s++) begin
          acc = 0;
          for (int m = 0; m < d.m_words; m++)
            for (int i = 0; i < N; i++)
              acc += longint'(inbuf[d.in_base + p*d.pix_stride + m][i]) *
                     wts[s][d.p_base + gi*d.m_words + m][i];
          c = d.cp_base + gi;
          a = d.out_base + p*d.cout + (d.group_base + gi)*S + s;
          ob[a] = ref_outfn(acc, cbias[s][c], cshift[s][c], int'(d.act));
        end
  endtask

  task automatic readout(int base, int len, ref int ob [BUF_DEPTH*N]);
    int got;
    @(negedge clk);
    ro_start = 1; ro_base = 6'(base); ro_len = 24'(len);
    @(negedge clk); ro_start = 0;
    got = 0;
    while (got < len) begin
      ro_ready = ($urandom_range(3) != 0);
      #1;
      if (ro_valid && !ro_ready) stalls++;
      @(posedge clk);
      if (ro_valid && ro_ready) begin
        check(int'(ro_data) == ob[base*N + got],
              $sformatf("byte %0d = %0d, expected %0d", got, ro_data, ob[base*N + got]));
        check(ro_last == (got == len - 1), "ro_last");
        got++;
      end
      @(negedge clk);
    end
    ro_ready = 0;
  endtask

  int ob1 [BUF_DEPTH*N];
  int ob2 [BUF_DEPTH*N];

  initial begin
    nnpe_desc_t d1, d2a, d2b;
    int sel0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // input image: 11 words
    for (int a = 0; a < 11; a++) begin
      @(negedge clk);
      dw_en = 1; dw_addr = 6'(a);
      for (int i = 0; i < N; i++) begin
        dw_data[i] = act_t'($urandom);
        inbuf[a][i] = int'(dw_data[i]);
      end
    end
    @(negedge clk); dw_en = 0;
    // weights for every SACC, all words
    for (int s = 0; s < S; s++)
      for (int a = 0; a < PBUF_DEPTH; a++) begin
        @(negedge clk);
        pw_en = 1; pw_sel = 2'(s); pw_addr = 5'(a);
        for (int i = 0; i < N; i++) begin
          pw_data[i] = wcode_t'($urandom);
          wts[s][a][i] = ref_wfactor(pw_data[i]);
        end
      end
    @(negedge clk); pw_en = 0;
    for (int s = 0; s < S; s++)
      for (int a = 0; a < CP_DEPTH; a++) begin
        @(negedge clk);
        cw_en = 1; cw_sel = 2'(s); cw_addr = 4'(a);
        cw_data.shift = 5'(6 + $urandom_range(3));
        cw_data.bias  = 16'($urandom_range(40)) - 16'sd20;
        cbias[s][a] = int'(cw_data.bias); cshift[s][a] = int'(cw_data.shift);
      end
    @(negedge clk); cw_en = 0;

    // ---------------- layer 1
    d1 = '0;
    d1.in_base = 1; d1.pix_stride = 2; d1.n_pix = 5; d1.m_words = 2;
    d1.n_groups = 4; d1.group_base = 0; d1.cout = 16; d1.out_base = 0;
    d1.p_base = 0; d1.cp_base = 0; d1.act = ACT_RELU; d1.swap = 1;
    sel0 = buf_sel;
    ref_run(d1, ob1);
    run(d1);
    check(buf_sel != sel0, "swap after layer 1");
    if (buf_sel != sel0) swaps++;
    readout(0, 5 * 16, ob1);

    // ---------------- layer 2: reads layer 1's output
    for (int a = 0; a < 5; a++)
      for (int i = 0; i < N; i++) inbuf[a][i] = ob1[a*N + i];
    d2a = '0;
    d2a.in_base = 0; d2a.pix_stride = 1; d2a.n_pix = 5; d2a.m_words = 1;
    d2a.n_groups = 1; d2a.group_base = 0; d2a.cout = 8; d2a.out_base = 16;
    d2a.p_base = 8; d2a.cp_base = 4; d2a.act = ACT_SIGMOID; d2a.swap = 0;
    d2b = d2a;
    d2b.group_base = 1; d2b.p_base = 9; d2b.cp_base = 5; d2b.swap = 1;
    ref_run(d2a, ob2);
    ref_run(d2b, ob2);
    sel0 = buf_sel;
    run(d2a);
    check(buf_sel == sel0, "no swap after a run without swap");
    run(d2b);
    check(buf_sel != sel0, "swap after layer 2");
    if (buf_sel != sel0) swaps++;
    readout(1, 5 * 8, ob2);

    check(stalls > 0, "readout back-pressure exercised");
    check(swaps == 2, "two buffer swaps");
    $display("mechanisms: swaps=%0d readout_stalls=%0d", swaps, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
