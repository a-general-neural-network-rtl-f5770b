// tb_grad_accu: self-checking test of the gradient accumulator and weight update.
// Several batches of random outer-product words are accumulated (the first
// word of each address overwrites), then every address is updated with a
// random learning rate; w_new must equal saturate(w_old - floor(gamma*G/2^24))
// computed in 64-bit integers, one cycle after upd_en.
module tb_grad_accu;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;
  localparam int L = 3, D = 7;
  logic clk = 0, rst_n = 0, acc_en = 0, acc_first = 0, upd_en = 0, w_valid;
  logic [2:0] acc_addr = 0, upd_addr = 0, w_addr;
  prod_t [L-1:0] prod = '0;
  data_t [L-1:0] w_old = '0, w_new;
  logic [15:0] gamma = 0;
  longint g [D][L];
  int checks = 0, failures = 0, sat_seen = 0;

  grad_accu #(.LANES(L), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int batch = 0; batch < 4; batch++) begin
      int m = $urandom_range(1, 5);
      for (int smp = 0; smp < m; smp++) begin
        for (int a = 0; a < D; a++) begin
          @(negedge clk);
          acc_en = 1; acc_first = (smp == 0); acc_addr = 3'(a);
          for (int i = 0; i < L; i++) begin
            prod[i] = prod_t'((batch == 3) ? 32'sh3fff0000 : 32'($urandom_range(131072)) - 32'sd65536);
            g[a][i] = (smp == 0) ? longint'(prod[i]) : g[a][i] + longint'(prod[i]);
          end
        end
      end
      @(negedge clk); acc_en = 0;
      gamma = (batch == 3) ? 16'hffff : 16'($urandom);
      for (int a = 0; a < D; a++) begin
        longint e [L];
        @(negedge clk);
        upd_en = 1; upd_addr = 3'(a);
        for (int i = 0; i < L; i++) begin
          w_old[i] = data_t'($urandom);
          e[i] = sat16(longint'(w_old[i]) - floordiv(longint'(gamma) * g[a][i], 24));
          if (e[i] == -32768) sat_seen++;
        end
        @(negedge clk); upd_en = 0;
        checks += 2;
        if (!w_valid) begin failures++; $display("FAIL w_valid"); end
        if (w_addr != 3'(a)) begin failures++; $display("FAIL w_addr"); end
        for (int i = 0; i < L; i++) begin
          checks++;
          if (longint'(w_new[i]) != e[i]) begin
            failures++;
            $display("FAIL a=%0d lane %0d got %0d expected %0d", a, i, w_new[i], e[i]);
          end
        end
      end
    end
    checks++;
    if (sat_seen == 0) begin failures++; $display("FAIL saturation not reached"); end
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
