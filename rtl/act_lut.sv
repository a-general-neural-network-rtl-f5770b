// act_lut: one loadable function look-up table.
//
// Maps a Q8.8 input x to f(x) by table. The input is shifted right by
// IN_SHIFT bits, clamped to the signed range of an AW-bit index and offset by
// half the table, so entry 0 holds f at the most negative covered input and
// entry 2^(AW-1) holds f(0). With IN_SHIFT = 3 and AW = 8 the table covers
// -4.0 .. +3.97 in steps of 1/32; inputs beyond that use the end entries.
// The read is registered: y is valid one cycle after x. The table is written
// through the load port (load_we, load_addr, load_data) so the same hardware
// computes whichever function is loaded. Loadable tables are the paper's
// method for activation and exponential functions; the size, addressing and
// clamping are this design's choice. Table contents are not reset.
module act_lut
  import gnn_pkg::*;
#(
  parameter int unsigned OUT_W    = 16,
  parameter int unsigned AW       = 8,
  parameter int unsigned IN_SHIFT = 3
) (
  input  logic             clk,
  input  logic             load_we,
  input  logic [AW-1:0]    load_addr,
  input  logic [OUT_W-1:0] load_data,
  input  data_t            x,
  output logic [OUT_W-1:0] y
);

  localparam int signed HALF = 2 ** (AW - 1);

  logic [OUT_W-1:0] table_q [2**AW];
  logic signed [DW-1:0] xs;
  logic [AW-1:0] idx;

  always_comb begin
    xs = x >>> IN_SHIFT;
    if (32'(xs) > HALF - 1)   idx = AW'(2 ** AW - 1);
    else if (32'(xs) < -HALF) idx = '0;
    else                      idx = AW'(32'(xs) + HALF);
  end

  always_ff @(posedge clk) begin
    if (load_we) table_q[load_addr] <= load_data;
    y <= table_q[idx];
  end

endmodule
