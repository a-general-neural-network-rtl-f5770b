// tb_gnn_train: the engine learning a small classification task.
//
// Four classes, each a random prototype of 16 inputs in [-0.5, 0.5]; a sample
// is its class prototype plus noise of up to +-0.125 per input. The
// input-to-hidden weights are random and fixed, the hidden-to-output weights
// start at zero, and the activation table is tanh. Every epoch loads a fresh
// batch of 8 samples with their one-hot labels and runs one training pass
// (gamma = 0.25); every 10 epochs an inference pass over a fixed test batch
// measures the accuracy (arg-max of the 1/1024 outputs) and the mean
// probability given to the true class. The test passes when, after 60
// epochs, the test batch is classified correctly in at least 7 of 8 cases
// and the mean true-class probability has risen from 0.25 to above 0.6.
// This checks that the forward pass, the error, the outer product, the
// accumulation over the batch and the update together reduce the loss.
module tb_gnn_train;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int NI = 16, NH = 16, NO = 4, L1 = 8, L2 = 4, MB = 8;
  localparam int G1 = NH / L1, K1 = NI + 1, K2 = NH + 1;
  localparam int HW = L1 * DW;
  localparam int EPOCHS = 60;

  logic clk = 0, rst_n = 0;
  logic host_we = 0, host_re = 0, start = 0, train = 0;
  host_sel_e host_sel = SEL_X, host_rsel = SEL_W2;
  logic [15:0] host_addr = 0, host_raddr = 0, gamma = 0;
  logic [HW-1:0] host_wdata = '0, host_rdata;
  logic [3:0] batch = 0;
  logic [1:0] layers = 1;
  logic busy, done, pred_valid, pred_last;
  logic pred_group;
  logic [3:0] pred_sample;
  logic [L2-1:0][10:0] pred_data;

  gnn_top dut (.*);
  always #5 clk = ~clk;

  int proto [NO][NI];
  int test_x [MB][NI];
  int test_c [MB];
  int checks = 0, failures = 0, n_epochs = 0;
  longint got [MB][NO];

  always @(posedge clk) begin
    if (rst_n && pred_valid)
      for (int p = 0; p < L2; p++) got[pred_sample][p] = longint'(pred_data[p]);
  end

  task automatic hwrite(input host_sel_e sel, input int addr, input logic [HW-1:0] d);
    @(negedge clk);
    host_we = 1; host_sel = sel; host_addr = 16'(addr); host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic load_batch(input int xs [MB][NI], input int cs [MB]);
    for (int s = 0; s < MB; s++) begin
      logic [HW-1:0] d = '0;
      for (int k = 0; k < NI; k++) hwrite(SEL_X, s * NI + k, HW'(16'(xs[s][k])));
      for (int p = 0; p < NO; p++) d[p*DW +: DW] = (p == cs[s]) ? 16'd256 : 16'd0;
      hwrite(SEL_LABEL, s, d);
    end
  endtask

  task automatic make_batch(output int xs [MB][NI], output int cs [MB]);
    for (int s = 0; s < MB; s++) begin
      cs[s] = s % NO;
      for (int k = 0; k < NI; k++) xs[s][k] = proto[cs[s]][k] + int'($urandom_range(64)) - 32;
    end
  endtask

  task automatic run(input bit tr);
    @(negedge clk);
    start = 1; train = tr; batch = 4'(MB); gamma = 16'd16384; layers = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  // inference on the test batch: returns correct count and mean true-class probability
  task automatic evaluate(output int correct, output real ptrue);
    load_batch(test_x, test_c);
    run(0);
    correct = 0; ptrue = 0.0;
    for (int s = 0; s < MB; s++) begin
      int best = 0;
      for (int o = 1; o < NO; o++) if (got[s][o] > got[s][best]) best = o;
      if (best == test_c[s]) correct++;
      ptrue += real'(got[s][test_c[s]]) / 1024.0 / MB;
    end
    $display("epoch %0d: test accuracy %0d/%0d, mean true-class probability %f", n_epochs, correct, MB, ptrue);
  endtask

  initial begin
    int xs [MB][NI];
    int cs [MB];
    int c0, c1;
    real p0, p1;
    for (int c = 0; c < NO; c++) for (int k = 0; k < NI; k++) proto[c][k] = int'($urandom_range(256)) - 128;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) hwrite(SEL_TANH, i, HW'(tanh_entry(i)));
    for (int i = 0; i < 256; i++) hwrite(SEL_EXP, i, HW'(exp_entry(i)));
    for (int g = 0; g < G1; g++)
      for (int k = 0; k < K1; k++) begin
        logic [HW-1:0] d = '0;
        for (int p = 0; p < L1; p++) d[p*DW +: DW] = 16'(int'($urandom_range(256)) - 128);
        hwrite(SEL_W1, g * K1 + k, d);
      end
    for (int k = 0; k < K2; k++) hwrite(SEL_W2, k, '0);
    make_batch(test_x, test_c);

    evaluate(c0, p0);
    for (int e = 0; e < EPOCHS; e++) begin
      make_batch(xs, cs);
      load_batch(xs, cs);
      run(1);
      n_epochs++;
      if (n_epochs % 10 == 0) evaluate(c1, p1);
    end
    checks += 3;
    if (c1 < 7) begin failures++; $display("FAIL accuracy %0d/8", c1); end
    if (p1 < 0.6) begin failures++; $display("FAIL true-class probability %f", p1); end
    if (p1 <= p0) begin failures++; $display("FAIL no learning"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
