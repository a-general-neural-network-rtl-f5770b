// tb_gnn_top: end-to-end test of the whole engine at its default sizes
// (16 inputs, 16 hidden neurons per layer, up to 2 hidden layers, 4 classes,
// 8 + 4 parallel units, batches of up to 8 samples).
//
// The testbench loads random weights, inputs and one-hot labels through the
// host port, then runs, in order: an inference batch of 8 samples; a training
// batch of 5 samples; a training batch of 1 sample; training and inference
// with two hidden layers; a switch of the activation table from tanh to ReLU
// followed by another training batch of 8.
// Every prediction word and, after every run, every hidden-to-output weight
// word (read back through the host port) is compared with a bit-exact
// integer model of the fixed-point network written here. The number of
// cycles of each run is compared with the schedule of the sequencer.
// It counts how often each mechanism occurred and fails if one never did:
// inference run, training run, gradient summed over several samples, weight
// word changed by an update, second hidden layer computed on the reused
// first-layer hardware, activation table switched, input clamped at the end
// of the activation table, host write ignored while busy.
module tb_gnn_top;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int NI = 16, NH = 16, NO = 4, L1 = 8, L2 = 4, MB = 8, HL = 2;
  localparam int G1 = NH / L1, G2 = NO / L2, K1 = NI + 1, K2 = NH + 1;
  localparam int HW = ((L1 > L2) ? L1 : L2) * DW;
  localparam int BWT = $clog2(MB + 1), EAT = addr_w(G2);

  logic clk = 0, rst_n = 0;
  logic host_we = 0, host_re = 0, start = 0, train = 0;
  host_sel_e host_sel = SEL_X, host_rsel = SEL_W2;
  logic [15:0] host_addr = 0, host_raddr = 0, gamma = 0;
  logic [HW-1:0] host_wdata = '0, host_rdata;
  logic [BWT-1:0] batch = 0;
  logic [1:0] layers = 1;
  logic busy, done, pred_valid, pred_last;
  logic [EAT-1:0] pred_group;
  logic [BWT-1:0] pred_sample;
  logic [L2-1:0][10:0] pred_data;

  gnn_top dut (.*);
  always #5 clk = ~clk;

  // ---------------- model state ----------------
  longint X [MB][NI];
  longint LBL [MB][NO];
  longint W1 [NH][K1];
  longint WH [NH][K2];   // weights of the second hidden layer
  longint W2 [NO][K2];
  longint PRED [MB][NO];
  bit relu_mode = 0;
  int checks = 0, failures = 0;
  int n_deep = 0;
  int n_infer = 0, n_train = 0, n_multi = 0, n_wchg = 0, n_switch = 0, n_clamp = 0, n_ignored = 0;

  function automatic longint act(input longint s);
    int idx = lut_index(int'(s), 3);
    if (idx == 0 || idx == 255) n_clamp++;
    return relu_mode ? relu_entry(idx) : tanh_entry(idx);
  endfunction

  // forward pass of sample s; returns hidden outputs and predictions
  task automatic forward(input int s, input int nl, output longint a [NH], output longint y [NO]);
    longint z, e [NO], sum = 0, gain, a0 [NH];
    for (int j = 0; j < NH; j++) begin
      longint acc = W1[j][NI] * 256;
      for (int k = 0; k < NI; k++) acc += X[s][k] * W1[j][k];
      a[j] = act(sat16(floordiv(acc, 8)));
    end
    if (nl > 1) begin
      a0 = a;
      for (int j = 0; j < NH; j++) begin
        longint acc = WH[j][NH] * 256;
        for (int k = 0; k < NH; k++) acc += a0[k] * WH[j][k];
        a[j] = act(sat16(floordiv(acc, 8)));
      end
    end
    for (int o = 0; o < NO; o++) begin
      longint acc = W2[o][NH] * 256;
      for (int h = 0; h < NH; h++) acc += a[h] * W2[o][h];
      z = sat16(floordiv(acc, 8));
      e[o] = exp_entry(lut_index(int'(z), 4));
      sum += e[o];
    end
    gain = (longint'(1) << 42) / sum;
    for (int o = 0; o < NO; o++) begin
      y[o] = (e[o] * gain) >> 32;
      if (y[o] > 2047) y[o] = 2047;
    end
  endtask

  task automatic model_run(input bit tr, input int m, input int gm, input int nl);
    longint G [NO][K2];
    longint a [NH], y [NO];
    for (int s = 0; s < m; s++) begin
      forward(s, nl, a, y);
      for (int o = 0; o < NO; o++) begin
        longint err = (y[o] >> 2) - LBL[s][o];
        PRED[s][o] = y[o];
        for (int h = 0; h < K2; h++) begin
          longint p = err * ((h == NH) ? 256 : a[h]);
          G[o][h] = (s == 0) ? p : G[o][h] + p;
        end
      end
    end
    if (tr) begin
      for (int o = 0; o < NO; o++)
        for (int h = 0; h < K2; h++) begin
          longint nw = sat16(W2[o][h] - floordiv(longint'(gm) * G[o][h], 24));
          if (nw != W2[o][h]) n_wchg++;
          W2[o][h] = nw;
        end
    end
  endtask

  // ---------------- host port ----------------
  task automatic hwrite(input host_sel_e sel, input int addr, input logic [HW-1:0] d);
    @(negedge clk);
    host_we = 1; host_sel = sel; host_addr = 16'(addr); host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic load_act(input bit relu);
    for (int i = 0; i < 256; i++) hwrite(SEL_TANH, i, HW'(relu ? relu_entry(i) : tanh_entry(i)));
    relu_mode = relu;
  endtask

  task automatic load_all();
    logic [HW-1:0] d;
    for (int s = 0; s < MB; s++)
      for (int k = 0; k < NI; k++) hwrite(SEL_X, s * NI + k, HW'(16'(X[s][k])));
    for (int g = 0; g < G1; g++)
      for (int k = 0; k < K1; k++) begin
        d = '0;
        for (int p = 0; p < L1; p++) d[p*DW +: DW] = 16'(W1[g*L1+p][k]);
        hwrite(SEL_W1, g * K1 + k, d);
      end
    for (int g = 0; g < G1; g++)
      for (int k = 0; k < K2; k++) begin
        d = '0;
        for (int p = 0; p < L1; p++) d[p*DW +: DW] = 16'(WH[g*L1+p][k]);
        hwrite(SEL_W1, G1 * K1 + g * K2 + k, d);
      end
    for (int g = 0; g < G2; g++)
      for (int k = 0; k < K2; k++) begin
        d = '0;
        for (int p = 0; p < L2; p++) d[p*DW +: DW] = 16'(W2[g*L2+p][k]);
        hwrite(SEL_W2, g * K2 + k, d);
      end
    for (int s = 0; s < MB; s++)
      for (int g = 0; g < G2; g++) begin
        d = '0;
        for (int p = 0; p < L2; p++) d[p*DW +: DW] = 16'(LBL[s][g*L2+p]);
        hwrite(SEL_LABEL, s * G2 + g, d);
      end
  endtask

  task automatic check_w2();
    for (int g = 0; g < G2; g++)
      for (int k = 0; k < K2; k++) begin
        @(negedge clk); host_re = 1; host_rsel = SEL_W2; host_raddr = 16'(g * K2 + k);
        @(negedge clk); host_re = 0;
        for (int p = 0; p < L2; p++) begin
          checks++;
          if (longint'($signed(host_rdata[p*DW +: DW])) != W2[g*L2+p][k]) begin
            failures++;
            $display("FAIL W2[%0d][%0d] got %0d expected %0d", g*L2+p, k,
                     $signed(host_rdata[p*DW +: DW]), W2[g*L2+p][k]);
          end
        end
      end
  endtask

  // predictions seen during a run
  longint got [MB][NO];
  int npred = 0;
  always @(posedge clk) begin
    if (pred_valid) begin
      for (int p = 0; p < L2; p++) got[pred_sample][int'(pred_group)*L2+p] = longint'(pred_data[p]);
      npred++;
    end
  end

  function automatic int sched_cycles(input bit tr, input int m, input int nl);
    int per = (G1 * K1 + 3) + (G1 + 3) + (G2 * K2 + 3) + (46 + G2);
    if (nl > 1) per += (G1 * K2 + 3) + (G1 + 3);
    if (tr) per += G2 * K2 + 3;
    return m * per + (tr ? G2 * K2 + 3 : 0) + 1;
  endfunction

  task automatic run(input bit tr, input int m, input int gm, input int nl = 1);
    int cyc = 0;
    bit tried = 0;
    npred = 0;
    @(negedge clk);
    start = 1; train = tr; batch = BWT'(m); gamma = 16'(gm); layers = 2'(nl);
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin
      // a host write to the weight buffer in the middle of a run must be ignored
      if (!tried && cyc == 20) begin
        host_we = 1; host_sel = SEL_W2; host_addr = 0; host_wdata = '1; tried = 1;
        n_ignored++;
      end else host_we = 0;
      @(negedge clk);
      cyc++;
    end
    host_we = 0;
    model_run(tr, m, gm, nl);
    if (nl > 1) n_deep++;
    if (tr) n_train++; else n_infer++;
    if (tr && m > 1) n_multi++;
    checks++;
    if (cyc != sched_cycles(tr, m, nl)) begin
      failures++; $display("FAIL run length %0d expected %0d", cyc, sched_cycles(tr, m, nl));
    end
    checks++;
    if (npred != m * G2) begin failures++; $display("FAIL %0d prediction words", npred); end
    for (int s = 0; s < m; s++)
      for (int o = 0; o < NO; o++) begin
        checks++;
        if (got[s][o] != PRED[s][o]) begin
          failures++; $display("FAIL pred[%0d][%0d] got %0d expected %0d", s, o, got[s][o], PRED[s][o]);
        end
      end
    check_w2();
    $display("run train=%0d batch=%0d layers=%0d: %0d cycles", tr, m, nl, cyc);
  endtask

  task automatic need(input int n, input string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("mechanism %s: %0d", what, n);
  endtask

  initial begin
    for (int s = 0; s < MB; s++) begin
      int cls = $urandom_range(NO - 1);
      for (int k = 0; k < NI; k++) X[s][k] = longint'($urandom_range(512)) - 256;
      if (s == 3) for (int k = 0; k < NI; k++) X[s][k] = 2000;  // drives hidden sums off the table
      for (int o = 0; o < NO; o++) LBL[s][o] = (o == cls) ? 256 : 0;
    end
    for (int j = 0; j < NH; j++) for (int k = 0; k < K1; k++) W1[j][k] = longint'($urandom_range(160)) - 80;
    for (int j = 0; j < NH; j++) for (int k = 0; k < K2; k++) WH[j][k] = longint'($urandom_range(160)) - 80;
    for (int o = 0; o < NO; o++) for (int k = 0; k < K2; k++) W2[o][k] = longint'($urandom_range(256)) - 128;

    repeat (3) @(posedge clk);
    rst_n = 1;
    load_act(0);
    for (int i = 0; i < 256; i++) hwrite(SEL_EXP, i, HW'(exp_entry(i)));
    load_all();
    check_w2();

    run(0, 8, 0);
    run(1, 5, 16384);
    run(1, 1, 8000);
    run(1, 6, 12000, 2);
    run(0, 3, 0, 2);
    load_act(1);
    n_switch++;
    run(1, 8, 4000);

    need(n_infer, "inference run");
    need(n_train, "training run");
    need(n_multi, "gradient summed over several samples");
    need(n_wchg, "weight word changed by update");
    need(n_deep, "second hidden layer on the reused first-layer hardware");
    need(n_switch, "activation table switched");
    need(n_clamp, "input clamped at end of activation table");
    need(n_ignored, "host write ignored while busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
