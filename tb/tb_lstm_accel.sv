// tb_lstm_accel: runs LSTM time steps at a reduced size and checks h.
//
// N = 8 lanes, 16 inputs, 8 hidden units (z = 24 bytes = 3 words). Three
// steps of one sequence, then a sequence reset and one more step. Weights
// and x are random; gate-row biases and shifts are random. The testbench
// keeps its own h and c and computes each step with the reference
// arithmetic. The weight stream stalls at random in the first steps and
// never in the last, where the number of cycles with weight beats is
// checked against 4 * H * ZW. The h stream sees random back-pressure.
module tb_lstm_accel;
  import hyd_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 8, X_LEN = 16, H_LEN = 8;
  localparam int ZW = (X_LEN + H_LEN + N - 1) / N;

  logic clk = 0, rst_n = 0;
  logic seq_reset = 0;
  logic x_valid = 0, x_ready; act_t x_data;
  logic wt_valid = 0, wt_ready; wcode_t [N-1:0] wt_data;
  logic cw_en = 0; logic [4:0] cw_addr; chan_param_t cw_data;
  logic h_valid, h_ready = 0, h_last; act_t h_data;
  logic busy, step_done;

  lstm_accel #(.N(N), .X_LEN(X_LEN), .H_LEN(H_LEN)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  int wstalls = 0, hstalls = 0;

  int W [H_LEN][4][ZW][N];
  wcode_t Wc [H_LEN][4][ZW][N];
  int bias [4*H_LEN], shft [4*H_LEN];
  int h_ref [H_LEN], c_ref [H_LEN];
  int x [X_LEN];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // weight stream driver
  bit stall_en = 1;
  int beats = 0, beat_first = -1, beat_last = -1;
  initial begin
    int j, q, m;
    j = 0; q = 0; m = 0;
    forever begin
      @(negedge clk);
      if (busy) begin
        wt_valid = !(stall_en && $urandom_range(3) == 0);
        for (int i = 0; i < N; i++) wt_data[i] = Wc[j][q][m][i];
        #1;
        if (!wt_valid && wt_ready) wstalls++;
        @(posedge clk);
        if (wt_valid && wt_ready) begin
          beats++;
          if (beat_first < 0) beat_first = cyc;
          beat_last = cyc;
          m++;
          if (m == ZW) begin m = 0; q++; end
          if (q == 4) begin q = 0; j = (j + 1) % H_LEN; end
        end
      end else wt_valid = 0;
    end
  end

  task automatic ref_step();
    int z [ZW*N];
    int gates [4];
    longint acc;
    int cn, hn;
    int hnew [H_LEN];
    for (int i = 0; i < ZW*N; i++) z[i] = 0;
    for (int i = 0; i < X_LEN; i++) z[i] = x[i];
    for (int i = 0; i < H_LEN; i++) z[X_LEN + i] = h_ref[i];
    for (int j = 0; j < H_LEN; j++) begin
      for (int q = 0; q < 4; q++) begin
        acc = 0;
        for (int m = 0; m < ZW; m++)
          for (int i = 0; i < N; i++) acc += longint'(z[m*N + i]) * W[j][q][m][i];
        gates[q] = ref_outfn(acc, bias[q*H_LEN + j], shft[q*H_LEN + j], (q == 2) ? 3 : 2);
      end
      ref_cell(gates[0], gates[1], gates[2], gates[3], c_ref[j], cn, hn);
      c_ref[j] = cn;
      hnew[j] = hn;
    end
    h_ref = hnew;
  endtask

  task automatic do_step(int step);
    int got;
    for (int i = 0; i < X_LEN; i++) x[i] = $urandom_range(255) - 128;
    ref_step();
    beats = 0; beat_first = -1;
    for (int i = 0; i < X_LEN; i++) begin
      @(negedge clk);
      x_valid = 1; x_data = act_t'(x[i]);
      @(posedge clk);
      while (!x_ready) @(posedge clk);
    end
    @(negedge clk); x_valid = 0;
    got = 0;
    while (got < H_LEN) begin
      @(negedge clk);
      h_ready = ($urandom_range(2) != 0);
      #1;
      if (h_valid && !h_ready) hstalls++;
      @(posedge clk);
      if (h_valid && h_ready) begin
        check(int'(h_data) == h_ref[got],
              $sformatf("step %0d h[%0d] = %0d, expected %0d", step, got, h_data, h_ref[got]));
        check(h_last == (got == H_LEN - 1), "h_last");
        got++;
      end
    end
    @(negedge clk); h_ready = 0;
    check(beats == 4 * H_LEN * ZW, $sformatf("weight beats %0d", beats));
    if (!stall_en)
      check(beat_last - beat_first == 4 * H_LEN * ZW - 1,
            $sformatf("step with no stalls took %0d beat cycles", beat_last - beat_first + 1));
    while (busy) @(negedge clk);
  endtask

  initial begin
    for (int j = 0; j < H_LEN; j++)
      for (int q = 0; q < 4; q++)
        for (int m = 0; m < ZW; m++)
          for (int i = 0; i < N; i++) begin
            Wc[j][q][m][i] = wcode_t'($urandom);
            W[j][q][m][i]  = ref_wfactor(Wc[j][q][m][i]);
          end
    for (int j = 0; j < H_LEN; j++) begin h_ref[j] = 0; c_ref[j] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 4 * H_LEN; a++) begin
      @(negedge clk);
      cw_en = 1; cw_addr = 5'(a);
      cw_data.shift = 5'(5 + $urandom_range(2));
      cw_data.bias  = 16'($urandom_range(60)) - 16'sd30;
      bias[a] = int'(cw_data.bias); shft[a] = int'(cw_data.shift);
    end
    @(negedge clk); cw_en = 0;
    while (busy) @(negedge clk);     // reset clears the state
    for (int s = 0; s < 3; s++) do_step(s);
    // new sequence
    @(negedge clk); seq_reset = 1;
    @(negedge clk); seq_reset = 0;
    while (busy) @(negedge clk);
    for (int j = 0; j < H_LEN; j++) begin h_ref[j] = 0; c_ref[j] = 0; end
    stall_en = 0;
    do_step(3);
    check(wstalls > 0 && hstalls > 0, "stalls exercised");
    $display("mechanisms: weight_stalls=%0d h_backpressure=%0d steps=4 seq_resets=1", wstalls, hstalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
