// outer_mult_bank: the "mult" block of the backward pass.
//
// Forms one word of the exterior (outer) product (Y^ - Y) (x) S2: each of the
// LANES multipliers takes one element of the error word err and multiplies it
// by the shared element s of S2, the hidden-layer output feeding the output
// layer. Products are full Q16.16 values. The result is registered: out_valid,
// prod and the caller's tag (for example the gradient address) appear one
// cycle after in_valid. Stepping s over all hidden outputs (and 1.0 for the
// bias) and err over all output words yields the whole outer-product matrix.
// The operation is the paper's; the lane count and the tag are this design's.
module outer_mult_bank
  import gnn_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter int unsigned TAG_W = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [TAG_W-1:0]      in_tag,
  input  data_t [LANES-1:0]     err,
  input  data_t                 s,
  output logic                  out_valid,
  output logic [TAG_W-1:0]      out_tag,
  output prod_t [LANES-1:0]     prod
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      prod      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_tag <= in_tag;
        for (int i = 0; i < LANES; i++) prod[i] <= err[i] * s;
      end
    end
  end

endmodule
