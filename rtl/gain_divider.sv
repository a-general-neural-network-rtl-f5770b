// gain_divider: the divider of the softmax gain control.
//
// Computes gain = floor(2^(LIMIT_LOG2+GF) / sum), i.e. the ratio LIMIT/sum of
// the softmax's maximum limit (LIMIT = 2^LIMIT_LOG2, 1024 by default, the
// paper's example value) to the sum of the exponentials, with GF extra
// fraction bits. A start pulse with sum loads the operands; a restoring
// divider then produces one quotient bit per clock, so done pulses for one
// cycle LIMIT_LOG2+GF+2 cycles after the start cycle (one cycle to load, one
// per quotient bit) and gain holds the result until the next start. start is ignored while busy. A zero sum gives the largest
// gain (all ones). The paper states only that the output is adjusted by the
// ratio of the sum to the limit; the bit-serial divider is this design's
// choice, one divider per softmax instead of one per output.
module gain_divider #(
  parameter int unsigned SUM_W      = 26,
  parameter int unsigned LIMIT_LOG2 = 10,
  parameter int unsigned GF         = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [SUM_W-1:0]              sum,
  output logic                          busy,
  output logic                          done,
  output logic [LIMIT_LOG2+GF:0]        gain
);

  localparam int unsigned NUM_W = LIMIT_LOG2 + GF + 1;
  localparam int unsigned CW    = $clog2(NUM_W + 1);

  logic [SUM_W-1:0] den;
  logic [SUM_W-1:0] rem;
  logic [NUM_W-1:0] num;
  logic [CW-1:0]    cnt;
  logic [SUM_W:0]   rem_sh;

  assign rem_sh = {rem, num[NUM_W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      gain <= '0;
      den  <= '0;
      rem  <= '0;
      num  <= '0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          den  <= sum;
          rem  <= '0;
          num  <= {1'b1, {(NUM_W-1){1'b0}}};
          gain <= '0;
          cnt  <= CW'(NUM_W);
        end
      end else begin
        num <= num << 1;
        if (den == '0) begin
          gain <= {gain[NUM_W-2:0], 1'b1};
        end else if (rem_sh >= {1'b0, den}) begin
          rem  <= SUM_W'(rem_sh - {1'b0, den});
          gain <= {gain[NUM_W-2:0], 1'b1};
        end else begin
          rem  <= rem_sh[SUM_W-1:0];
          gain <= {gain[NUM_W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
