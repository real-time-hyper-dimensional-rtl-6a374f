// sacc_vector: one N-wide vector shift-accumulate (SACC) module.
//
// The NNPE and the LSTM accelerator are built from these. Each beat brings N
// signed 8-bit data values and N 4-bit power-of-two weight codes. Every lane
// replaces the multiply by a sign change and a shift (hyd_pkg::pot_product);
// an adder tree sums the N lane results and an accumulator adds the tree
// sums of the M beats of one dot product (an M x N vector operation).
//
// Timing: two pipeline stages. Stage 1 registers the adder-tree sum of the
// beat; stage 2 is the accumulator. A beat flagged `first` restarts the
// accumulator, a beat flagged `last` makes `done` pulse two cycles later with
// `acc` holding the finished dot product. Beats may come on every cycle and
// dot products may follow each other without gaps.
//
// From the source: N parallel sign/shift lanes, adder tree, accumulator, and
// the widths N = 256 (NNPE) and 160 (LSTM). This design's choices: the weight
// code format, the pipeline split and ACC_W.
module sacc_vector
  import hyd_pkg::*;
#(
  parameter int N     = 256,
  parameter int ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    first,
  input  logic                    last,
  input  act_t   [N-1:0]          data,
  input  wcode_t [N-1:0]          wcode,
  output logic                    done,
  output logic signed [ACC_W-1:0] acc
);
  localparam int NP = 1 << $clog2(N);   // tree width, padded to a power of two

  logic signed [ACC_W-1:0] tree [1:2*NP-1];
  logic signed [ACC_W-1:0] sum_q;
  logic                    v_q, first_q, last_q;

  // Lane products at the leaves, then a balanced binary adder tree.
  always_comb begin
    for (int i = 0; i < NP; i++)
      tree[NP+i] = (i < N) ? ACC_W'(pot_product(data[i], wcode[i])) : '0;
    for (int i = NP - 1; i >= 1; i--)
      tree[i] = tree[2*i] + tree[2*i+1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q     <= 1'b0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
      sum_q   <= '0;
      acc     <= '0;
      done    <= 1'b0;
    end else begin
      v_q     <= in_valid;
      first_q <= first;
      last_q  <= last;
      if (in_valid) sum_q <= tree[1];
      done    <= v_q && last_q;
      if (v_q) acc <= first_q ? sum_q : acc + sum_q;
    end
  end
endmodule
