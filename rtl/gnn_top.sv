// gnn_top: programmable-logic part of a general neural-network training
// engine with one hidden layer.
//
// Forward pass: buffer0 holds the batch's input vectors and buffer1 the
// input-to-hidden weights (plus a bias column); the first mult-add bank (L1
// parallel multiply-accumulate units) forms the hidden sums S1 into the S1
// RAM; the activation bank (loadable look-up tables, tanh by default use)
// writes f(S1) into the Tanh(S1) RAM. With layers > 1 the same bank, table
// and RAMs are used again for each further hidden layer, the previous hidden
// outputs taking the place of the inputs. The second mult-add bank (L2 units)
// combines these with the hidden-to-output weights (plus bias) into the
// output sums, and the softmax (exponential tables, an adder and a gain stage
// relative to a limit of 1024) turns them into class probabilities, given out
// on pred_* in units of 1/1024.
// Backward pass (train = 1): the error Y^ - Y against the label buffer is
// stored in the error RAM; the mult bank forms its outer product with the
// hidden outputs S2 = f(S1) and the accu block sums it over the batch; after
// the batch the hidden-to-output weights become W2 - gamma * sum.
// gnn_control sequences all of it; one run is started by a start pulse and
// ends with a done pulse.
//
// Host side (the processing system's AXI links in the original system are
// replaced by a plain word port): while busy is low, host_we writes host_wdata
// into the memory chosen by host_sel at host_addr (word layouts in the
// README); host_re reads buffer1 or the hidden-to-output weight buffer,
// host_rdata valid one cycle later. Host writes while busy are ignored.
// train, batch and layers are captured at start; gamma (unsigned Q0.16) must
// be held stable until done.
// The block structure and dataflow follow the paper's block diagram; sizes,
// number formats, word layouts and the schedule are this design's choices.
module gnn_top
  import gnn_pkg::*;
#(
  parameter int unsigned N_IN      = 16,
  parameter int unsigned N_HID     = 16,
  parameter int unsigned N_OUT     = 4,
  parameter int unsigned L1        = 8,
  parameter int unsigned L2        = 4,
  parameter int unsigned MAX_BATCH = 8,
  parameter int unsigned MAX_HL    = 2,
  localparam int unsigned HLW      = $clog2(MAX_HL + 1),
  localparam int unsigned HW       = ((L1 > L2) ? L1 : L2) * DW,
  localparam int unsigned BW       = $clog2(MAX_BATCH + 1),
  localparam int unsigned EA       = addr_w(N_OUT / L2),
  localparam int unsigned LIMIT_LOG2 = 10,
  localparam int unsigned PW       = LIMIT_LOG2 + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host load / read-back port
  input  logic                     host_we,
  input  host_sel_e                host_sel,
  input  logic [15:0]              host_addr,
  input  logic [HW-1:0]            host_wdata,
  input  logic                     host_re,
  input  host_sel_e                host_rsel,
  input  logic [15:0]              host_raddr,
  output logic [HW-1:0]            host_rdata,
  // run control
  input  logic                     start,
  input  logic                     train,
  input  logic [BW-1:0]            batch,
  input  logic [HLW-1:0]           layers,
  input  logic [15:0]              gamma,
  output logic                     busy,
  output logic                     done,
  // predictions
  output logic                     pred_valid,
  output logic                     pred_last,
  output logic [EA-1:0]            pred_group,
  output logic [BW-1:0]            pred_sample,
  output logic [L2-1:0][PW-1:0]    pred_data
);

  localparam int unsigned G1  = N_HID / L1;
  localparam int unsigned G2  = N_OUT / L2;
  localparam int unsigned K1  = N_IN + 1;
  localparam int unsigned K2  = N_HID + 1;
  localparam int unsigned XD  = N_IN * MAX_BATCH;
  localparam int unsigned W1D = G1 * K1 + (MAX_HL - 1) * G1 * K2;
  localparam int unsigned W2D = G2 * K2;
  localparam int unsigned LBD = G2 * MAX_BATCH;
  localparam int unsigned XA  = addr_w(XD);
  localparam int unsigned W1A = addr_w(W1D);
  localparam int unsigned S1A = addr_w(G1);
  localparam int unsigned W2A = addr_w(W2D);
  localparam int unsigned LBA = addr_w(LBD);
  localparam int unsigned LNA = addr_w(L1);

  // ---------------- control ----------------
  logic             mac1_hid;
  logic             x_re, w1_re, mac1_en, mac1_clear, mac1_one, s1_we, s1_re, tanh_valid;
  logic             t_re, w2_re, mac2_en, mac2_clear, mac2_one, sm_in_valid, sm_in_last;
  logic             label_re, e_we, e_re, mult_valid, mult_one, acc_first, upd_en;
  logic [XA-1:0]    x_raddr;
  logic [W1A-1:0]   w1_raddr;
  logic [S1A-1:0]   s1_waddr, s1_raddr, t_waddr, t_raddr;
  logic [LNA-1:0]   t_lane;
  logic [W2A-1:0]   w2_raddr, mult_tag, upd_addr;
  logic [EA-1:0]    sm_in_group, sm_out_group, e_waddr, e_raddr;
  logic [LBA-1:0]   label_raddr;
  logic             sm_out_valid, sm_out_last, sm_busy;
  logic [BW-1:0]    sample;

  gnn_control #(
    .N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .L1(L1), .L2(L2), .MAX_BATCH(MAX_BATCH),
    .MAX_HL(MAX_HL)
  ) u_control (
    .clk, .rst_n, .start, .train, .batch, .layers, .busy, .done,
    .x_re, .x_raddr, .w1_re, .w1_raddr, .mac1_en, .mac1_clear, .mac1_one, .mac1_hid, .s1_we, .s1_waddr,
    .s1_re, .s1_raddr, .tanh_valid, .t_waddr,
    .t_re, .t_raddr, .t_lane, .w2_re, .w2_raddr, .mac2_en, .mac2_clear, .mac2_one,
    .sm_in_valid, .sm_in_last, .sm_in_group,
    .sm_out_valid, .sm_out_last, .sm_out_group, .label_re, .label_raddr, .e_we, .e_waddr,
    .e_re, .e_raddr, .mult_valid, .mult_one, .mult_tag, .acc_first,
    .upd_en, .upd_addr, .sample
  );

  // ---------------- host decode ----------------
  logic hw_ok;
  assign hw_ok = host_we && !busy;

  // ---------------- buffer0: input vectors ----------------
  data_t x_rdata;
  gnn_ram #(.WIDTH(DW), .DEPTH(XD)) u_buffer0 (
    .clk, .we(hw_ok && host_sel == SEL_X), .waddr(XA'(host_addr)), .wdata(host_wdata[DW-1:0]),
    .re(x_re), .raddr(x_raddr), .rdata(x_rdata)
  );

  // ---------------- buffer1: input-to-hidden weights ----------------
  data_t [L1-1:0] w1_rdata;
  gnn_ram #(.WIDTH(L1*DW), .DEPTH(W1D)) u_buffer1 (
    .clk, .we(hw_ok && host_sel == SEL_W1), .waddr(W1A'(host_addr)), .wdata(host_wdata[L1*DW-1:0]),
    .re(busy ? w1_re : (host_re && host_rsel == SEL_W1)),
    .raddr(busy ? w1_raddr : W1A'(host_raddr)), .rdata(w1_rdata)
  );

  // ---------------- mult-add bank 1 ----------------
  // input: x from buffer0, or a hidden output for the second and later hidden layers
  data_t [L1-1:0] s1_sum;
  data_t          t_elem;
  mult_add_bank #(.LANES(L1)) u_mac1 (
    .clk, .rst_n, .clear(mac1_clear), .en(mac1_en),
    .x(mac1_one ? ONE : (mac1_hid ? t_elem : x_rdata)),
    .w(w1_rdata), .result(s1_sum)
  );

  // ---------------- S1 RAM ----------------
  data_t [L1-1:0] s1_rdata;
  gnn_ram #(.WIDTH(L1*DW), .DEPTH(G1)) u_s1_ram (
    .clk, .we(s1_we), .waddr(s1_waddr), .wdata(s1_sum), .re(s1_re), .raddr(s1_raddr), .rdata(s1_rdata)
  );

  // ---------------- Tanh bank ----------------
  logic           act_valid;
  data_t [L1-1:0] act_out;
  tanh_bank #(.LANES(L1)) u_tanh_bank (
    .clk, .rst_n, .load_we(hw_ok && host_sel == SEL_TANH), .load_addr(host_addr[7:0]),
    .load_data(host_wdata[DW-1:0]), .in_valid(tanh_valid), .din(s1_rdata),
    .out_valid(act_valid), .dout(act_out)
  );

  // ---------------- Tanh(S1) RAM ----------------
  data_t [L1-1:0] t_rdata;
  gnn_ram #(.WIDTH(L1*DW), .DEPTH(G1)) u_tanh_s1_ram (
    .clk, .we(act_valid), .waddr(t_waddr), .wdata(act_out), .re(t_re), .raddr(t_raddr), .rdata(t_rdata)
  );
  assign t_elem = t_rdata[t_lane];

  // ---------------- hidden-to-output weight buffer ----------------
  data_t [L2-1:0] w2_rdata, w2_new;
  logic           w2_upd_valid;
  logic [W2A-1:0] w2_upd_addr;
  gnn_ram #(.WIDTH(L2*DW), .DEPTH(W2D)) u_w2_buffer (
    .clk,
    .we(w2_upd_valid || (hw_ok && host_sel == SEL_W2)),
    .waddr(w2_upd_valid ? w2_upd_addr : W2A'(host_addr)),
    .wdata(w2_upd_valid ? w2_new : host_wdata[L2*DW-1:0]),
    .re(busy ? w2_re : (host_re && host_rsel == SEL_W2)),
    .raddr(busy ? w2_raddr : W2A'(host_raddr)), .rdata(w2_rdata)
  );

  // ---------------- mult-add bank 2 ----------------
  data_t [L2-1:0] z_sum;
  mult_add_bank #(.LANES(L2)) u_mac2 (
    .clk, .rst_n, .clear(mac2_clear), .en(mac2_en), .x(mac2_one ? ONE : t_elem),
    .w(w2_rdata), .result(z_sum)
  );

  // ---------------- softmax ----------------
  logic [L2-1:0][PW-1:0] sm_out;
  softmax_unit #(.LANES(L2), .GROUPS(G2), .LIMIT_LOG2(LIMIT_LOG2)) u_softmax (
    .clk, .rst_n, .load_we(hw_ok && host_sel == SEL_EXP), .load_addr(host_addr[7:0]),
    .load_data(host_wdata[23:0]), .in_valid(sm_in_valid), .in_last(sm_in_last),
    .in_group(sm_in_group), .din(z_sum), .out_valid(sm_out_valid), .out_last(sm_out_last),
    .out_group(sm_out_group), .dout(sm_out), .busy(sm_busy)
  );

  assign pred_valid  = sm_out_valid;
  assign pred_last   = sm_out_last;
  assign pred_group  = sm_out_group;
  assign pred_data   = sm_out;
  assign pred_sample = sample;

  // ---------------- label buffer ----------------
  data_t [L2-1:0] label_rdata;
  gnn_ram #(.WIDTH(L2*DW), .DEPTH(LBD)) u_label_buffer (
    .clk, .we(hw_ok && host_sel == SEL_LABEL), .waddr(LBA'(host_addr)),
    .wdata(host_wdata[L2*DW-1:0]), .re(label_re), .raddr(label_raddr), .rdata(label_rdata)
  );

  // ---------------- (Y^ - Y) RAM ----------------
  logic [L2-1:0][PW-1:0] pred_q;
  data_t [L2-1:0]        err_word, e_rdata;
  always_ff @(posedge clk) begin
    if (sm_out_valid) pred_q <= sm_out;
  end
  always_comb begin
    for (int i = 0; i < L2; i++)
      err_word[i] = data_t'(DW'(pred_q[i]) >> (LIMIT_LOG2 - FRAC)) - label_rdata[i];
  end
  gnn_ram #(.WIDTH(L2*DW), .DEPTH((G2 > 1) ? G2 : 2)) u_error_ram (
    .clk, .we(e_we), .waddr(EA'(e_waddr)), .wdata(err_word), .re(e_re), .raddr(EA'(e_raddr)), .rdata(e_rdata)
  );

  // ---------------- mult: outer product ----------------
  logic           prod_valid;
  logic [W2A-1:0] prod_tag;
  prod_t [L2-1:0] prod;
  outer_mult_bank #(.LANES(L2), .TAG_W(W2A)) u_mult (
    .clk, .rst_n, .in_valid(mult_valid), .in_tag(mult_tag), .err(e_rdata),
    .s(mult_one ? ONE : t_elem), .out_valid(prod_valid), .out_tag(prod_tag), .prod
  );

  // ---------------- accu: gradient sum and weight update ----------------
  grad_accu #(.LANES(L2), .DEPTH(W2D)) u_accu (
    .clk, .rst_n, .acc_en(prod_valid), .acc_first, .acc_addr(prod_tag), .prod,
    .upd_en, .upd_addr, .w_old(w2_rdata), .gamma,
    .w_valid(w2_upd_valid), .w_addr(w2_upd_addr), .w_new(w2_new)
  );

  // ---------------- host read-back ----------------
  logic host_rsel_w2_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       host_rsel_w2_q <= 1'b0;
    else if (host_re) host_rsel_w2_q <= (host_rsel == SEL_W2);
  end
  assign host_rdata = host_rsel_w2_q ? HW'(w2_rdata) : HW'(w1_rdata);

  // The sizes must divide into whole words of the parallel banks.
  initial begin
    assert (N_HID % L1 == 0) else $error("N_HID must be a multiple of L1");
    assert (N_OUT % L2 == 0) else $error("N_OUT must be a multiple of L2");
    assert (LIMIT_LOG2 >= FRAC) else $error("LIMIT_LOG2 must not be below FRAC");
  end

  // A new sample never enters the softmax while it is still working on one.
  assert property (@(posedge clk) disable iff (!rst_n) sm_in_valid && sm_in_group == '0 |-> !sm_busy);

endmodule
