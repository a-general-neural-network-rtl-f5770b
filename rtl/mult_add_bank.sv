// mult_add_bank: a row of parallel multiply-accumulate units.
//
// Every unit computes one neuron's weighted sum. Each cycle with en high, the
// shared input element x is multiplied by that unit's own weight w[i] and the
// Q16.16 product is added to a 40-bit accumulator; with clear high the
// accumulator restarts from this cycle's product (or from zero when en is
// low). After the last element, result[i] is the sum rescaled to Q8.8 and
// saturated to 16 bits; it is a combinational view of the accumulators and
// stays valid until the next clear. A bias is formed by the caller as one more
// element: x = 1.0 with the bias as weight.
//
// Following the paper, the bank is a set of identical units whose number
// (LANES) can be chosen to fit the layer and the FPGA; the same module serves
// the input-to-hidden and the hidden-to-output layer. The broadcast-input
// dataflow, the number format and the saturation are this design's choice.
module mult_add_bank
  import gnn_pkg::*;
#(
  parameter int unsigned LANES = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    en,
  input  data_t                   x,
  input  data_t [LANES-1:0]       w,
  output data_t [LANES-1:0]       result
);

  logic signed [ACC_W-1:0] acc [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_unit
    prod_t p;
    assign p = x * w[i];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     acc[i] <= '0;
      else if (clear) acc[i] <= en ? ACC_W'(p) : '0;
      else if (en)    acc[i] <= acc[i] + ACC_W'(p);
    end

    assign result[i] = sat_data(64'(acc[i] >>> FRAC));
  end

endmodule
