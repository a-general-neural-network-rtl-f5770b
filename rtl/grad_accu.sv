// grad_accu: the "accu" block: gradient accumulation and weight update.
//
// Accumulate: with acc_en high, the word of LANES outer products prod is added
// into the gradient store at acc_addr (a register file of DEPTH words of
// LANES x 40-bit Q16.16 sums); with acc_first also high the word is
// overwritten instead, which starts a new batch. Over a batch of m samples the
// store thus holds G = sum_i (y^_i - y_i) (x) S2_i.
// Update: with upd_en high, the old weight word w_old of address upd_addr is
// combined with the stored gradient of that address into
// w_new = saturate(w_old - gamma * G), gamma being an unsigned Q0.16 learning
// rate (gamma * G is rescaled from Q.32 to Q8.8 by an arithmetic shift). The
// result is registered: w_valid, w_addr and w_new appear one cycle after
// upd_en, ready to be written back into the weight buffer.
// The sum over the batch and the scaling by gamma are the paper's backward
// formula; plain gradient descent, the formats and the register-file store
// are this design's choice. Accumulate and update must not be requested in
// the same cycle.
module grad_accu
  import gnn_pkg::*;
#(
  parameter int unsigned LANES   = 4,
  parameter int unsigned DEPTH   = 17,
  parameter int unsigned GAMMA_W = 16,
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 acc_en,
  input  logic                 acc_first,
  input  logic [AW-1:0]        acc_addr,
  input  prod_t [LANES-1:0]    prod,
  input  logic                 upd_en,
  input  logic [AW-1:0]        upd_addr,
  input  data_t [LANES-1:0]    w_old,
  input  logic [GAMMA_W-1:0]   gamma,
  output logic                 w_valid,
  output logic [AW-1:0]        w_addr,
  output data_t [LANES-1:0]    w_new
);

  localparam int unsigned SH = GAMMA_W + 2 * FRAC - FRAC; // Q.(GAMMA_W+16) -> Q.8

  logic signed [ACC_W-1:0] g_mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (acc_en) begin
      for (int i = 0; i < LANES; i++)
        g_mem[acc_addr][i] <= acc_first ? ACC_W'(prod[i]) : g_mem[acc_addr][i] + ACC_W'(prod[i]);
    end
  end

  // gamma * G for every lane of the addressed gradient word
  logic signed [ACC_W+GAMMA_W:0] step [LANES];
  always_comb begin
    for (int i = 0; i < LANES; i++) step[i] = $signed({1'b0, gamma}) * g_mem[upd_addr][i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_valid <= 1'b0;
      w_addr  <= '0;
      w_new   <= '0;
    end else begin
      w_valid <= upd_en;
      if (upd_en) begin
        w_addr <= upd_addr;
        for (int i = 0; i < LANES; i++)
          w_new[i] <= sat_data(64'(w_old[i]) - 64'(step[i] >>> SH));
      end
    end
  end

endmodule
