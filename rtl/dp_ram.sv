// dp_ram: simple dual-port RAM used for the embedded buffers.
//
// The NNPE keeps layer data in on-chip buffers (data input, data output and
// one parameter buffer per SACC module) so that most layers never touch the
// external memory; the LSTM and HD accelerators use the same memory. This is
// one write port with byte enables and one read port, both on `clk`, written
// as an array so that synthesis maps it to block or UltraRAM.
//
// Timing: a write lands at the clock edge. A read returns the word one cycle
// after `raddr` is presented (registered output); a read of the address
// written in the same cycle returns the old word.
// The port arrangement and the registered read are this design's choice.
module dp_ram #(
  parameter int W     = 2048,   // word width in bits, a multiple of 8
  parameter int DEPTH = 4096,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           we,
  input  logic [AW-1:0]  waddr,
  input  logic [W/8-1:0] wbe,
  input  logic [W-1:0]   wdata,
  input  logic [AW-1:0]  raddr,
  output logic [W-1:0]   rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)
      for (int b = 0; b < W / 8; b++)
        if (wbe[b]) mem[waddr][b*8 +: 8] <= wdata[b*8 +: 8];
    rdata <= mem[raddr];
  end
endmodule
