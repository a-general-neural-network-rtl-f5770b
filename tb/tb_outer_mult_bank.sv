// tb_outer_mult_bank: self-checking test of the outer-product multiplier bank.
// Random error words and S2 elements; every lane's product and the tag must
// appear one cycle after in_valid, and out_valid must follow in_valid.
module tb_outer_mult_bank;
  import gnn_pkg::*;
  localparam int L = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [7:0] in_tag = 0, out_tag;
  data_t [L-1:0] err = '0;
  data_t s = 0;
  prod_t [L-1:0] prod;
  int checks = 0, failures = 0;

  outer_mult_bank #(.LANES(L), .TAG_W(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      longint e [L];
      @(negedge clk);
      in_valid = 1; in_tag = 8'($urandom); s = data_t'($urandom);
      for (int i = 0; i < L; i++) begin
        err[i] = data_t'($urandom);
        e[i] = longint'(err[i]) * longint'(s);
      end
      @(negedge clk); in_valid = 0;
      checks += 2;
      if (!out_valid) begin failures++; $display("FAIL out_valid"); end
      if (out_tag != in_tag) begin failures++; $display("FAIL tag"); end
      for (int i = 0; i < L; i++) begin
        checks++;
        if (longint'(prod[i]) != e[i]) begin
          failures++; $display("FAIL lane %0d got %0d expected %0d", i, prod[i], e[i]);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid stuck"); end
    end
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
