// tanh_bank: parallel activation function units (the "Tanh bank").
//
// LANES copies of a loadable look-up table (act_lut) turn one word of LANES
// first-layer sums S1 into the hidden-layer outputs f(S1) in one clock:
// dout and out_valid follow din and in_valid by one cycle. A table load is
// written into every copy at once, so all lanes compute the same function.
// Loading tanh gives the paper's Tanh layer; loading sigmoid or ReLU values
// switches the activation without changing the hardware, as the paper
// intends. Table size and input range are those of act_lut (256 entries,
// -4.0 .. +3.97), chosen by this design.
module tanh_bank
  import gnn_pkg::*;
#(
  parameter int unsigned LANES    = 8,
  parameter int unsigned LUT_AW   = 8,
  parameter int unsigned IN_SHIFT = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load_we,
  input  logic [LUT_AW-1:0]   load_addr,
  input  data_t               load_data,
  input  logic                in_valid,
  input  data_t [LANES-1:0]   din,
  output logic                out_valid,
  output data_t [LANES-1:0]   dout
);

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic [DW-1:0] y;
    act_lut #(.OUT_W(DW), .AW(LUT_AW), .IN_SHIFT(IN_SHIFT)) u_lut (
      .clk, .load_we, .load_addr, .load_data(load_data), .x(din[i]), .y(y)
    );
    assign dout[i] = data_t'(y);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
