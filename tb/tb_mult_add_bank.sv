// tb_mult_add_bank: self-checking test of the parallel multiply-accumulate bank.
// Random dot products of random length, each unit with its own weights, are
// compared with sums formed in 64-bit integers, rescaled by floor division and
// saturated. Large operands force saturation in both directions; the result
// must be ready right after the last accumulate and survive idle cycles.
module tb_mult_add_bank;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;
  localparam int L = 5;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  data_t x = 0;
  data_t [L-1:0] w = '0;
  data_t [L-1:0] result;
  int checks = 0, failures = 0, sat_seen = 0;

  mult_add_bank #(.LANES(L)) dut (.*);
  always #5 clk = ~clk;

  task automatic run(input int n, input int big);
    longint sum [L];
    for (int i = 0; i < L; i++) sum[i] = 0;
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      en = 1; clear = (k == 0);
      x = big ? data_t'($urandom_range(32767, 20000)) : data_t'($urandom_range(1023) - 512);
      for (int i = 0; i < L; i++) begin
        w[i] = big ? data_t'((i % 2) ? -20000 : 20000) : data_t'($urandom_range(1023) - 512);
        sum[i] += longint'(x) * longint'(w[i]);
      end
    end
    @(negedge clk); en = 0; clear = 0;
    repeat ($urandom_range(3)) @(negedge clk);
    for (int i = 0; i < L; i++) begin
      longint e = sat16(floordiv(sum[i], 8));
      if (e == 32767 || e == -32768) sat_seen++;
      checks++;
      if (longint'(result[i]) != e) begin
        failures++;
        $display("FAIL lane %0d n=%0d: got %0d expected %0d", i, n, result[i], e);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) run($urandom_range(1, 20), 0);
    run(8, 1);
    checks++;
    if (sat_seen < 2) begin failures++; $display("FAIL saturation not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
