// tb_gain_divider: self-checking test of the softmax gain divider.
// Random sums of all magnitudes, compared with 2^42 / sum computed in 64-bit
// integers; done must rise exactly LIMIT_LOG2+GF+2 = 44 cycles after the
// start cycle. A zero sum must give the all-ones gain.
module tb_gain_divider;
  localparam int SUM_W = 26, LL = 10, GF = 32;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [SUM_W-1:0] sum = 0;
  logic [LL+GF:0] gain;
  int checks = 0, failures = 0;

  gain_divider #(.SUM_W(SUM_W), .LIMIT_LOG2(LL), .GF(GF)) dut (.*);
  always #5 clk = ~clk;

  task automatic one(input longint s);
    longint unsigned exp_g;
    int cyc = 0;
    exp_g = (s == 0) ? ((64'd1 << (LL + GF + 1)) - 1) : ((64'd1 << (LL + GF)) / longint'(s));
    @(negedge clk); start = 1; sum = SUM_W'(s);
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (cyc != LL + GF + 1) begin failures++; $display("FAIL latency %0d", cyc + 1); end
    if (64'(gain) != exp_g) begin
      failures++;
      $display("FAIL sum=%0d gain=%0d expected %0d", s, gain, exp_g);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    one(1); one(3); one(1024); one(0); one((1 << SUM_W) - 1);
    for (int t = 0; t < 40; t++) one(longint'($urandom_range(1, (1 << SUM_W) - 1)) >> $urandom_range(20));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
