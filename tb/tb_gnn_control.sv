// tb_gnn_control: self-checking test of the sequencer on its own.
// Small sizes (3 inputs, 4 hidden, 4 outputs, 2 + 2 lanes) make every loop
// run more than once. A simple responder stands in for the softmax: a fixed
// time after the last output-layer word it returns one word per group. The
// testbench records every address and strobe the sequencer gives and compares
// the recorded streams with the ones expected from nested loops over samples,
// layers, groups and elements, for inference and training batches with one
// and with two hidden layers.
module tb_gnn_control;
  localparam int NI = 3, NH = 4, NO = 4, L1 = 2, L2 = 2, MB = 3;
  localparam int G1 = NH / L1, G2 = NO / L2, K1 = NI + 1, K2 = NH + 1;
  logic clk = 0, rst_n = 0, start = 0, train = 0;
  logic [1:0] batch = 0;
  logic [1:0] layers = 1;
  logic mac1_hid;
  logic busy, done;
  logic x_re, w1_re, mac1_en, mac1_clear, mac1_one, s1_we, s1_re, tanh_valid;
  logic [3:0] x_raddr;
  logic [4:0] w1_raddr;
  logic s1_waddr, s1_raddr, t_waddr, t_raddr, t_lane;
  logic t_re, w2_re, mac2_en, mac2_clear, mac2_one, sm_in_valid, sm_in_last, sm_in_group;
  logic [3:0] w2_raddr, mult_tag, upd_addr;
  logic sm_out_valid = 0, sm_out_last = 0, sm_out_group = 0;
  logic label_re, e_we, e_waddr, e_re, e_raddr, mult_valid, mult_one, acc_first, upd_en;
  logic [2:0] label_raddr;
  logic [1:0] sample;
  int checks = 0, failures = 0;

  gnn_control #(.N_IN(NI), .N_HID(NH), .N_OUT(NO), .L1(L1), .L2(L2), .MAX_BATCH(MB)) dut (.*);
  always #5 clk = ~clk;

  // softmax stand-in: G2 result words, 10 cycles after the last input word
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && sm_in_valid && sm_in_last) begin
        repeat (10) @(posedge clk);
        for (int g = 0; g < G2; g++) begin
          sm_out_valid <= 1; sm_out_group <= g[0]; sm_out_last <= (g == G2 - 1);
          @(posedge clk);
        end
        sm_out_valid <= 0; sm_out_last <= 0;
      end
    end
  end

  int q_x[$], q_w1[$], q_s1w[$], q_act[$], q_t[$], q_w2[$], q_smi[$], q_lbl[$], q_ew[$];
  int q_mult[$], q_first[$], q_upd[$], n_clear1, n_one1, n_clear2, n_one2, n_en1, n_en2, n_done, n_hid;

  // the Tanh(S1) write address belongs to the activation bank's output, one cycle after tanh_valid
  logic act_q = 0;
  always @(posedge clk) act_q <= tanh_valid;

  always @(posedge clk) if (rst_n) begin
    if (x_re) q_x.push_back(x_raddr);
    if (w1_re) q_w1.push_back(w1_raddr);
    if (mac1_en) n_en1++;
    if (mac1_clear) n_clear1++;
    if (mac1_one) n_one1++;
    if (mac1_hid) n_hid++;
    if (s1_we) q_s1w.push_back(s1_waddr);
    if (act_q) q_act.push_back(t_waddr);
    if (t_re) q_t.push_back(t_raddr);
    if (w2_re) q_w2.push_back(w2_raddr);
    if (mac2_en) n_en2++;
    if (mac2_clear) n_clear2++;
    if (mac2_one) n_one2++;
    if (sm_in_valid) q_smi.push_back(2 * sm_in_group + sm_in_last);
    if (label_re) q_lbl.push_back(label_raddr);
    if (e_we) q_ew.push_back(e_waddr);
    if (mult_valid) begin q_mult.push_back(2 * mult_tag + mult_one); q_first.push_back(acc_first); end
    if (upd_en) q_upd.push_back(upd_addr);
    if (done) n_done++;
  end

  task automatic cmp(input string what, input int got[$], input int exp[$]);
    checks++;
    if (got.size() != exp.size()) begin
      failures++; $display("FAIL %s: %0d entries, expected %0d", what, got.size(), exp.size());
      return;
    end
    foreach (exp[i]) if (got[i] != exp[i]) begin
      failures++; $display("FAIL %s[%0d]: %0d expected %0d", what, i, got[i], exp[i]);
      return;
    end
  endtask

  task automatic cnt(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d expected %0d", what, got, exp); end
  endtask

  task automatic one_run(input bit tr, input int m, input int nl = 1);
    int e_x[$], e_w1[$], e_s1w[$], e_act[$], e_t[$], e_smi[$], e_lbl[$], e_ew[$], e_mult[$], e_first[$], e_upd[$];
    q_x = {}; q_w1 = {}; q_s1w = {}; q_act = {}; q_t = {}; q_w2 = {}; q_smi = {}; q_lbl = {};
    q_ew = {}; q_mult = {}; q_first = {}; q_upd = {};
    {n_clear1, n_one1, n_clear2, n_one2, n_en1, n_en2, n_done, n_hid} = '0;
    for (int s = 0; s < m; s++) begin
      for (int g = 0; g < G1; g++)
        for (int k = 0; k < K1; k++) begin
          if (k < NI) e_x.push_back(s * NI + k);
          e_w1.push_back(g * K1 + k);
        end
      for (int g = 0; g < G1; g++) begin e_s1w.push_back(g); e_act.push_back(g); end
      if (nl > 1) begin
        for (int g = 0; g < G1; g++)
          for (int k = 0; k < K2; k++) begin
            if (k < NH) e_t.push_back(k / L1);
            e_w1.push_back(G1 * K1 + g * K2 + k);
          end
        for (int g = 0; g < G1; g++) begin e_s1w.push_back(g); e_act.push_back(g); end
      end
      for (int g = 0; g < G2; g++) for (int k = 0; k < NH; k++) e_t.push_back(k / L1);
      for (int g = 0; g < G2; g++) e_smi.push_back(2 * g + (g == G2 - 1));
      for (int g = 0; g < G2; g++) begin e_lbl.push_back(s * G2 + g); e_ew.push_back(g); end
      if (tr) for (int g = 0; g < G2; g++) begin
        for (int k = 0; k < NH; k++) e_t.push_back(k / L1);
        for (int k = 0; k < K2; k++) begin
          e_mult.push_back(2 * (g * K2 + k) + (k == NH));
          e_first.push_back(s == 0);
        end
      end
    end
    if (tr) for (int a = 0; a < G2 * K2; a++) e_upd.push_back(a);
    @(negedge clk); start = 1; train = tr; batch = 2'(m); layers = 2'(nl);
    @(negedge clk); start = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy"); end
    while (!done) @(negedge clk);
    @(negedge clk);
    cmp("x addr", q_x, e_x);
    cmp("w1 addr", q_w1, e_w1);
    cmp("s1 write", q_s1w, e_s1w);
    cmp("activation", q_act, e_act);
    cmp("tanh(s1) read", q_t, e_t);
    cmp("softmax in", q_smi, e_smi);
    cmp("label addr", q_lbl, e_lbl);
    cmp("error write", q_ew, e_ew);
    cmp("mult", q_mult, e_mult);
    cmp("acc_first", q_first, e_first);
    cmp("update", q_upd, e_upd);
    cnt("mac1 en", n_en1, m * G1 * (K1 + ((nl > 1) ? K2 : 0)));
    cnt("mac1 clear", n_clear1, m * G1 * nl);
    cnt("mac1 bias", n_one1, m * G1 * nl);
    cnt("mac1 hidden input", n_hid, (nl > 1) ? m * G1 * K2 : 0);
    cnt("mac2 en", n_en2, m * G2 * K2);
    cnt("mac2 clear", n_clear2, m * G2);
    cnt("mac2 bias", n_one2, m * G2);
    cnt("w2 reads", q_w2.size(), m * G2 * K2 + (tr ? G2 * K2 : 0));
    cnt("done", n_done, 1);
    cnt("busy low", int'(busy), 0);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    one_run(0, 2);
    one_run(1, 3);
    one_run(1, 1);
    one_run(1, 2, 2);
    one_run(0, 3, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
