// softmax_unit: look-up-table softmax with gain control.
//
// Receives the output-layer sums z one word of LANES values at a time
// (in_valid, din, in_group), GROUPS words per sample, in_last marking the
// last. Each lane looks up e^z in its own loadable exponential table
// (act_lut, 256 entries over -8.0 .. +7.94, 24-bit unsigned Q16.8 outputs);
// the words of exponentials are kept and an adder sums all of them. After the
// last word, gain_divider forms gain = LIMIT/sum (LIMIT = 1024 by default,
// with GF fraction bits), and the unit then emits one output word per clock
// (out_valid, out_group, out_last) holding y_j = e^{z_j} * gain, an unsigned
// value in units of 1/LIMIT: the probabilities of the sample summed to about
// LIMIT. busy is high from the first input word to the last output word; a new
// sample must not start while busy.
//
// Latency from the last input word to the first output word is
// LIMIT_LOG2 + GF + 5 cycles (47 at the defaults); the outputs then take
// GROUPS cycles.
// The exponential table, the adder and the gain stage relative to a maximum
// limit of the sum are the paper's; computing the ratio by one divider and a
// multiply per output, and all widths, are this design's choice.
module softmax_unit
  import gnn_pkg::*;
#(
  parameter int unsigned LANES      = 4,
  parameter int unsigned GROUPS     = 1,
  parameter int unsigned LIMIT_LOG2 = 10,
  parameter int unsigned EXP_W      = 24,
  parameter int unsigned GF         = 32,
  parameter int unsigned LUT_AW     = 8,
  parameter int unsigned IN_SHIFT   = 4,
  localparam int unsigned GW        = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned PW        = LIMIT_LOG2 + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // exponential table load (written into every lane)
  input  logic                    load_we,
  input  logic [LUT_AW-1:0]       load_addr,
  input  logic [EXP_W-1:0]        load_data,
  // logits in
  input  logic                    in_valid,
  input  logic                    in_last,
  input  logic [GW-1:0]           in_group,
  input  data_t [LANES-1:0]       din,
  // probabilities out, in units of 1/2^LIMIT_LOG2
  output logic                    out_valid,
  output logic                    out_last,
  output logic [GW-1:0]           out_group,
  output logic [LANES-1:0][PW-1:0] dout,
  output logic                    busy
);

  localparam int unsigned SUM_W = EXP_W + $clog2(LANES * GROUPS + 1);
  localparam int unsigned GAIN_W = LIMIT_LOG2 + GF + 1;

  // ---- exponential look-up, one clock ----
  logic [LANES-1:0][EXP_W-1:0] e;
  for (genvar i = 0; i < LANES; i++) begin : g_exp
    act_lut #(.OUT_W(EXP_W), .AW(LUT_AW), .IN_SHIFT(IN_SHIFT)) u_lut (
      .clk, .load_we, .load_addr, .load_data, .x(din[i]), .y(e[i])
    );
  end

  logic          v1, last1;
  logic [GW-1:0] g1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; last1 <= 1'b0; g1 <= '0;
    end else begin
      v1 <= in_valid; last1 <= in_last; g1 <= in_group;
    end
  end

  // ---- adder: sum of all exponentials of the sample ----
  logic [SUM_W-1:0] word_sum, sum_q, sum_next;
  logic             have_part;
  always_comb begin
    word_sum = '0;
    for (int i = 0; i < LANES; i++) word_sum += SUM_W'(e[i]);
    sum_next = (have_part ? sum_q : '0) + word_sum;
  end

  logic [LANES-1:0][EXP_W-1:0] exp_mem [GROUPS];
  logic             div_start;
  logic [SUM_W-1:0] div_sum;

  always_ff @(posedge clk) begin
    if (v1) exp_mem[g1] <= e;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_q <= '0; have_part <= 1'b0; div_start <= 1'b0; div_sum <= '0;
    end else begin
      div_start <= 1'b0;
      if (v1) begin
        sum_q     <= sum_next;
        have_part <= !last1;
        if (last1) begin
          div_start <= 1'b1;
          div_sum   <= sum_next;
        end
      end
    end
  end

  // ---- gain control: gain = LIMIT / sum ----
  logic              div_busy, div_done;
  logic [GAIN_W-1:0] gain;
  gain_divider #(.SUM_W(SUM_W), .LIMIT_LOG2(LIMIT_LOG2), .GF(GF)) u_div (
    .clk, .rst_n, .start(div_start), .sum(div_sum), .busy(div_busy), .done(div_done), .gain
  );

  // ---- output: y_j = e_j * gain, one word per clock ----
  logic          emitting, collecting;
  logic [GW-1:0] ocnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      emitting <= 1'b0; ocnt <= '0; collecting <= 1'b0;
    end else begin
      if (in_valid) collecting <= 1'b1;
      if (div_done) begin
        emitting <= 1'b1;
        ocnt     <= '0;
      end else if (emitting) begin
        if (32'(ocnt) == GROUPS - 1) begin
          emitting   <= 1'b0;
          collecting <= 1'b0;
        end
        ocnt <= ocnt + 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic [EXP_W+GAIN_W-1:0] p;
      logic [EXP_W+GAIN_W-1:0] q;
      p = (EXP_W+GAIN_W)'(exp_mem[ocnt][i]) * (EXP_W+GAIN_W)'(gain);
      q = p >> GF;
      dout[i] = (q > (EXP_W+GAIN_W)'(2**PW - 1)) ? PW'(2**PW - 1) : PW'(q);
    end
  end

  assign out_valid = emitting;
  assign out_group = ocnt;
  assign out_last  = emitting && (32'(ocnt) == GROUPS - 1);
  assign busy      = collecting || v1 || div_start || div_busy || emitting;

endmodule
