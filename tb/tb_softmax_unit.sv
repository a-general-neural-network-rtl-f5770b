// tb_softmax_unit: self-checking test of the look-up-table softmax.
// Loads an exponential table, sends samples of two words of four logits
// (random, clustered and beyond the table's range) and checks each output
// against the integer model: e_j from the table, gain = 2^42 / sum,
// y_j = floor(e_j * gain / 2^32). It also checks that the outputs sum to
// about 1024 and lie within 0.01 of the real softmax of the quantised logits,
// the output order and last flag, and the latency of 47 cycles from the last
// input word to the first output word.
module tb_softmax_unit;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;
  localparam int L = 4, G = 2, N = L * G, LL = 10, GF = 32;
  logic clk = 0, rst_n = 0, load_we = 0, in_valid = 0, in_last = 0;
  logic [7:0] load_addr = 0;
  logic [23:0] load_data = 0;
  logic in_group = 0, out_group;
  data_t [L-1:0] din = '0;
  logic out_valid, out_last, busy;
  logic [L-1:0][LL:0] dout;
  int checks = 0, failures = 0;

  softmax_unit #(.LANES(L), .GROUPS(G)) dut (.*);
  always #5 clk = ~clk;

  task automatic sample(input int kind);
    int z [N];
    longint e [N];
    longint sum = 0, gain, y, ysum = 0;
    real rs = 0.0;
    int lat = 0;
    for (int j = 0; j < N; j++) begin
      case (kind)
        0: z[j] = int'($urandom_range(1536)) - 768;
        1: z[j] = int'($urandom_range(64)) + 100;
        default: z[j] = (j % 2) ? 30000 : -30000;
      endcase
      e[j] = exp_entry(lut_index(z[j], 4));
      sum += e[j];
      rs += $exp(real'(lut_index(z[j], 4) - 128) / 16.0);
    end
    gain = (longint'(1) << 42) / sum;
    for (int g = 0; g < G; g++) begin
      @(negedge clk);
      in_valid = 1; in_group = g[0]; in_last = (g == G - 1);
      for (int i = 0; i < L; i++) din[i] = data_t'(z[g * L + i]);
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != LL + GF + 5) begin failures++; $display("FAIL latency %0d", lat); end
    for (int g = 0; g < G; g++) begin
      checks += 2;
      if (!out_valid || out_group != g[0]) begin failures++; $display("FAIL order g=%0d", g); end
      if (out_last != (g == G - 1)) begin failures++; $display("FAIL last"); end
      for (int i = 0; i < L; i++) begin
        int j = g * L + i;
        real p = $exp(real'(lut_index(z[j], 4) - 128) / 16.0) / rs;
        y = (e[j] * gain) >> GF;
        ysum += y;
        checks += 2;
        if (longint'(dout[i]) != y) begin
          failures++; $display("FAIL z=%0d got %0d expected %0d", z[j], dout[i], y);
        end
        if ((real'(dout[i]) / 1024.0 - p) > 0.01 || (p - real'(dout[i]) / 1024.0) > 0.01) begin
          failures++; $display("FAIL accuracy z=%0d got %0d p=%f", z[j], dout[i], p);
        end
      end
      @(negedge clk);
    end
    checks += 2;
    if (ysum > 1024 || ysum < 1024 - N) begin failures++; $display("FAIL sum %0d", ysum); end
    if (out_valid || busy) begin failures++; $display("FAIL not finished"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); load_we = 1; load_addr = 8'(i); load_data = 24'(exp_entry(i));
    end
    @(negedge clk); load_we = 0;
    for (int t = 0; t < 12; t++) sample(t % 3);
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
