// tb_tanh_bank: self-checking test of the activation bank.
// Loads a tanh table, sends random words (including inputs beyond the table's
// range) and checks every lane one cycle later against tanh of the quantised
// input; then loads a ReLU table into the same hardware and checks again.
module tb_tanh_bank;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;
  localparam int L = 3;
  logic clk = 0, rst_n = 0, load_we = 0, in_valid = 0, out_valid;
  logic [7:0] load_addr = 0;
  data_t load_data = 0;
  data_t [L-1:0] din = '0, dout;
  int checks = 0, failures = 0;

  tanh_bank #(.LANES(L)) dut (.*);
  always #5 clk = ~clk;

  task automatic load(input bit relu);
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); load_we = 1; load_addr = 8'(i);
      load_data = data_t'(relu ? relu_entry(i) : tanh_entry(i));
    end
    @(negedge clk); load_we = 0;
  endtask

  task automatic sweep(input bit relu);
    for (int t = 0; t < 60; t++) begin
      int xv [L];
      @(negedge clk); in_valid = 1;
      for (int i = 0; i < L; i++) begin
        xv[i] = (t % 10 == 0) ? ((i % 2) ? -30000 : 30000) : int'($urandom_range(2400)) - 1200;
        din[i] = data_t'(xv[i]);
      end
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid"); end
      for (int i = 0; i < L; i++) begin
        int idx = lut_index(xv[i], 3);
        int e = relu ? relu_entry(idx) : tanh_entry(idx);
        checks++;
        if (int'(dout[i]) != e) begin
          failures++;
          $display("FAIL x=%0d lane %0d got %0d expected %0d", xv[i], i, dout[i], e);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    load(0);
    sweep(0);
    load(1);
    sweep(1);
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
