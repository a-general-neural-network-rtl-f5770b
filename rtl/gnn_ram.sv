// gnn_ram: simple dual-port RAM used for every buffer of the engine
// (buffer0, buffer1, S1 RAM, Tanh(S1) RAM, hidden-to-output weight buffer,
// label buffer and the (Y^-Y) error RAM).
//
// One write port and one read port on the same clock. A write stores wdata
// at waddr at the clock edge. A read is registered: rdata shows the word at
// raddr one cycle after re is high, and holds it while re is low. A read and
// a write of the same address in one cycle return the old word. This is the
// shape of an FPGA block RAM; the width, depth and latency are this design's
// choice, the paper only names the buffers. The contents are not reset.
module gnn_ram #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = gnn_pkg::addr_w(DEPTH)
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [AW-1:0]         waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [AW-1:0]         raddr,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
