// hd_item_mem: position and intensity item memories of the HD mapper.
//
// The HD encoder maps feature k with value v to a D-bit hypervector by
// binding (XOR) a random position hypervector P[k] with an intensity (level)
// hypervector L[q(v)]. Both sets of vectors are random lookup tables that
// belong to the trained HD model; here they are two RAMs loaded through the
// write ports. A lookup returns one W-bit chunk c of the bound vector:
//   bound = P[k][c] ^ L[lvl][c]
// Words are stored at k*NCH + c and lvl*NCH + c, NCH = D/W.
//
// Timing: `rd_en` with (rd_k, rd_lvl, rd_c) returns `bound` one cycle later
// with `bound_valid`. Writes take one cycle and may overlap lookups.
//
// From the source: "random mapping to HD binary vector" with position and
// intensity mapping held in lookup tables, XOR binding. The chunked,
// RAM-based organisation and the loaded (rather than generated) tables are
// this design's choice.
module hd_item_mem #(
  parameter int D      = 4096,
  parameter int W      = 256,
  parameter int K      = 512,
  parameter int LEVELS = 256,
  localparam int NCH = D / W,
  localparam int CA  = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int KA  = $clog2(K),
  localparam int LA  = $clog2(LEVELS),
  localparam int PAW = $clog2(K * NCH),
  localparam int LAW = $clog2(LEVELS * NCH)
) (
  input  logic           clk,
  input  logic           rst_n,
  // model load
  input  logic           pos_we,
  input  logic [PAW-1:0] pos_waddr,
  input  logic           lvl_we,
  input  logic [LAW-1:0] lvl_waddr,
  input  logic [W-1:0]   wdata,
  // lookup
  input  logic           rd_en,
  input  logic [KA-1:0]  rd_k,
  input  logic [LA-1:0]  rd_lvl,
  input  logic [CA-1:0]  rd_c,
  output logic           bound_valid,
  output logic [W-1:0]   bound
);
  logic [W-1:0] pos_q, lvl_q;

  dp_ram #(.W(W), .DEPTH(K * NCH)) u_pos (
    .clk, .we(pos_we), .waddr(pos_waddr), .wbe('1), .wdata(wdata),
    .raddr(PAW'(rd_k) * PAW'(NCH) + PAW'(rd_c)), .rdata(pos_q));

  dp_ram #(.W(W), .DEPTH(LEVELS * NCH)) u_lvl (
    .clk, .we(lvl_we), .waddr(lvl_waddr), .wbe('1), .wdata(wdata),
    .raddr(LAW'(rd_lvl) * LAW'(NCH) + LAW'(rd_c)), .rdata(lvl_q));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) bound_valid <= 1'b0;
    else        bound_valid <= rd_en;

  assign bound = pos_q ^ lvl_q;
endmodule
