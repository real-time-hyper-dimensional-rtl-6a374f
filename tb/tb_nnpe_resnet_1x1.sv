// tb_nnpe_resnet_1x1: two ResNet50 layers on the NNPE at its default size
// (8 SACC vectors of 256 lanes, 4096-word data buffers).
//
// The layers are the 1x1 convolutions of a conv2_x bottleneck block at full
// size: a 56x56x256 input (802,816 bytes, the largest activation of the
// network, filling 3136 of the 4096 buffer words) is reduced to 64 channels
// with ReLU, and expanded back to 256 channels. The 64-channel result keeps a
// pitch of 256 bytes per pixel (one buffer word), so the second layer reads
// one word per pixel and gives zero-coded weights to the 192 unused lanes.
// Both runs swap the buffers. The run times are checked against
// groups * pixels * M + 6 cycles, and the 256 output channels of several
// pixels are read back through the byte stream and compared with a
// reference computed from the same weights.
//
// Residual additions are not part of the engine, so the block's shortcut
// path is not modelled.
module tb_nnpe_resnet_1x1;
  import hyd_pkg::*;
  import tb_ref_pkg::*;

  localparam int S = 8, N = 256, PIX = 56 * 56, C_IN = 256, C_MID = 64, C_OUT = 256;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic dw_en = 0; logic [11:0] dw_addr; act_t [N-1:0] dw_data;
  logic pw_en = 0; logic [2:0] pw_sel; logic [8:0] pw_addr; wcode_t [N-1:0] pw_data;
  logic cw_en = 0; logic [2:0] cw_sel; logic [7:0] cw_addr; chan_param_t cw_data;
  logic start = 0; nnpe_desc_t desc; logic busy, done, buf_sel;
  logic ro_start = 0; logic [11:0] ro_base; logic [23:0] ro_len;
  logic ro_valid, ro_ready = 0, ro_last; act_t ro_data;

  nnpe dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] img [PIX][C_IN];
  int w1 [S][C_MID/S][C_IN];        // layer 1: SACC s, group g
  int w2 [S][C_OUT/S][C_MID];       // layer 2, lanes 0..63 only
  int cb [S][48], csh [S][48];

  task automatic run(nnpe_desc_t d);
    int t0;
    @(negedge clk); desc = d; start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(cyc - t0 == int'(d.n_groups) * int'(d.n_pix) * int'(d.m_words) + 6,
          $sformatf("run time %0d", cyc - t0));
  endtask

  function automatic int ref_l1(int p, int c);
    longint acc = 0;
    int s = c % S, g = c / S;
    for (int i = 0; i < C_IN; i++) acc += longint'($signed(img[p][i])) * w1[s][g][i];
    return ref_outfn(acc, cb[s][g], csh[s][g], 1);
  endfunction

  function automatic int ref_l2(int p, int c, const ref int mid [C_MID]);
    longint acc = 0;
    int s = c % S, g = c / S;
    for (int i = 0; i < C_MID; i++) acc += longint'(mid[i]) * w2[s][g][i];
    return ref_outfn(acc, cb[s][8 + g], csh[s][8 + g], 0);
  endfunction

  initial begin
    nnpe_desc_t d1, d2;
    int pix_list [5];
    int mid [C_MID];
    int expb [C_OUT];
    int got, sel0;
    pix_list = '{0, 1, 1777, 3000, PIX - 1};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // input activation, one buffer word per pixel
    for (int p = 0; p < PIX; p++) begin
      @(negedge clk); dw_en = 1; dw_addr = 12'(p);
      for (int i = 0; i < C_IN; i++) begin
        img[p][i] = 8'($urandom);
        dw_data[i] = act_t'(img[p][i]);
      end
    end
    @(negedge clk); dw_en = 0;
    // weights: words 0..7 layer 1, words 8..39 layer 2
    for (int s = 0; s < S; s++) begin
      for (int g = 0; g < C_MID / S; g++) begin
        @(negedge clk); pw_en = 1; pw_sel = 3'(s); pw_addr = 9'(g);
        for (int i = 0; i < N; i++) begin
          pw_data[i] = wcode_t'($urandom);
          w1[s][g][i] = ref_wfactor(pw_data[i]);
        end
      end
      for (int g = 0; g < C_OUT / S; g++) begin
        @(negedge clk); pw_en = 1; pw_sel = 3'(s); pw_addr = 9'(8 + g);
        for (int i = 0; i < N; i++) begin
          pw_data[i] = (i < C_MID) ? wcode_t'($urandom) : wcode_t'(4'b0111);
          if (i < C_MID) w2[s][g][i] = ref_wfactor(pw_data[i]);
        end
      end
      for (int e = 0; e < 40; e++) begin
        @(negedge clk); pw_en = 0; cw_en = 1; cw_sel = 3'(s); cw_addr = 8'(e);
        cw_data.shift = 5'((e < 8) ? 8 + $urandom_range(2) : 6 + $urandom_range(2));
        cw_data.bias  = 16'($urandom_range(40)) - 16'sd20;
        cb[s][e] = int'(cw_data.bias); csh[s][e] = int'(cw_data.shift);
      end
      @(negedge clk); cw_en = 0;
    end

    d1 = '0;
    d1.in_base = 0; d1.pix_stride = 1; d1.n_pix = 16'(PIX); d1.m_words = 1;
    d1.n_groups = 12'(C_MID / S); d1.cout = 16'(N); d1.out_base = 0;
    d1.p_base = 0; d1.cp_base = 0; d1.act = ACT_RELU; d1.swap = 1;
    d2 = d1;
    d2.n_groups = 12'(C_OUT / S); d2.p_base = 8; d2.cp_base = 8; d2.act = ACT_NONE;
    sel0 = buf_sel;
    run(d1);
    run(d2);
    check(buf_sel == sel0, "two swaps bring the first buffer back as input");

    foreach (pix_list[k]) begin
      int p = pix_list[k];
      for (int c = 0; c < C_MID; c++) mid[c] = ref_l1(p, c);
      for (int c = 0; c < C_OUT; c++) expb[c] = ref_l2(p, c, mid);
      @(negedge clk); ro_start = 1; ro_base = 12'(p); ro_len = 24'(C_OUT);
      @(negedge clk); ro_start = 0; ro_ready = 1;
      got = 0;
      while (got < C_OUT) begin
        @(posedge clk);
        if (ro_valid && ro_ready) begin
          check(int'(ro_data) == expb[got],
                $sformatf("pixel %0d channel %0d: %0d, expected %0d", p, got, ro_data, expb[got]));
          got++;
        end
      end
      @(negedge clk); ro_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
