// gnn_control: sequencer of the whole training / inference run.
//
// A start pulse (with train, batch = number of samples m, 1..MAX_BATCH, and
// layers = number of hidden layers, 1..MAX_HL) runs, for every sample i of
// the batch, these phases one after another:
//   L1   first mult-add bank: for each group of L1 hidden neurons, N_IN+1
//        cycles reading x_k from buffer0 and one weight word from buffer1
//        (the last cycle feeds 1.0 for the bias); the sums go to the S1 RAM.
//   ACT  each S1 word passes through the activation bank into Tanh(S1) RAM.
//        If hidden layers remain, L1 and ACT run again for the next one with
//        the previous hidden outputs (read from Tanh(S1) RAM, N_HID+1
//        cycles per group, mac1_hid high) as input and that layer's block of
//        buffer1 as weights: the same bank, table and RAMs are reused.
//   L2   second mult-add bank: for each group of L2 outputs, N_HID+1 cycles
//        reading one hidden output (one lane of a Tanh(S1) word) and one
//        word of the hidden-to-output weight buffer; the sums enter softmax.
//   SMX  wait for the softmax outputs; each output word is paired with its
//        label word and the error (Y^-Y) is written to the error RAM.
//   BWD  (train only) for each error word and each hidden output s_k (and
//        1.0), one outer-product word is formed and added to the gradient
//        store (overwritten for the first sample of the batch).
// After the last sample of a training run:
//   UPD  every word of the hidden-to-output weight buffer is read, updated
//        by the accumulator and written back.
// Then done pulses for one cycle and busy falls.
//
// Every memory read is issued in one cycle and used in the next (stage d1);
// a result that passes one more register is written in the stage after
// (d2). Each phase ends with DRAIN idle cycles so no phase reads a word the
// previous one is still writing. Outputs named *_re/*_raddr are the issue
// stage; mac*, tanh, mult and upd strobes are stage d1; s1_we, t_we and
// sm_in_* are stage d2 (the top writes Tanh(S1) from the bank's own valid).
// The paper says only that the control unit times the buffer reads and
// writes, the matrix operations and the storing of results; this schedule,
// with no overlap between phases, is this design's own.
module gnn_control
  import gnn_pkg::*;
#(
  parameter int unsigned N_IN      = 16,
  parameter int unsigned N_HID     = 16,
  parameter int unsigned N_OUT     = 4,
  parameter int unsigned L1        = 8,
  parameter int unsigned L2        = 4,
  parameter int unsigned MAX_BATCH = 8,
  parameter int unsigned MAX_HL    = 2,
  localparam int unsigned G1   = N_HID / L1,
  localparam int unsigned G2   = N_OUT / L2,
  localparam int unsigned K1   = N_IN + 1,
  localparam int unsigned K2   = N_HID + 1,
  localparam int unsigned XA   = addr_w(N_IN * MAX_BATCH),
  localparam int unsigned W1D  = G1 * K1 + (MAX_HL - 1) * G1 * K2,
  localparam int unsigned W1A  = addr_w(W1D),
  localparam int unsigned S1A  = addr_w(G1),
  localparam int unsigned W2A  = addr_w(G2 * K2),
  localparam int unsigned LBA  = addr_w(G2 * MAX_BATCH),
  localparam int unsigned EA   = addr_w(G2),
  localparam int unsigned LNA  = addr_w(L1),
  localparam int unsigned BW   = $clog2(MAX_BATCH + 1),
  localparam int unsigned HLW  = $clog2(MAX_HL + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             train,
  input  logic [BW-1:0]    batch,
  input  logic [HLW-1:0]   layers,
  output logic             busy,
  output logic             done,
  // buffer0 / buffer1 reads, first mult-add bank
  output logic             x_re,
  output logic [XA-1:0]    x_raddr,
  output logic             w1_re,
  output logic [W1A-1:0]   w1_raddr,
  output logic             mac1_en,
  output logic             mac1_clear,
  output logic             mac1_one,
  output logic             mac1_hid,
  output logic             s1_we,
  output logic [S1A-1:0]   s1_waddr,
  // activation
  output logic             s1_re,
  output logic [S1A-1:0]   s1_raddr,
  output logic             tanh_valid,
  output logic [S1A-1:0]   t_waddr,
  // second mult-add bank
  output logic             t_re,
  output logic [S1A-1:0]   t_raddr,
  output logic [LNA-1:0]   t_lane,
  output logic             w2_re,
  output logic [W2A-1:0]   w2_raddr,
  output logic             mac2_en,
  output logic             mac2_clear,
  output logic             mac2_one,
  output logic             sm_in_valid,
  output logic             sm_in_last,
  output logic [EA-1:0]    sm_in_group,
  // softmax result, labels, error
  input  logic             sm_out_valid,
  input  logic             sm_out_last,
  input  logic [EA-1:0]    sm_out_group,
  output logic             label_re,
  output logic [LBA-1:0]   label_raddr,
  output logic             e_we,
  output logic [EA-1:0]    e_waddr,
  // backward
  output logic             e_re,
  output logic [EA-1:0]    e_raddr,
  output logic             mult_valid,
  output logic             mult_one,
  output logic [W2A-1:0]   mult_tag,
  output logic             acc_first,
  // weight update
  output logic             upd_en,
  output logic [W2A-1:0]   upd_addr,
  // current sample, for observation
  output logic [BW-1:0]    sample
);

  localparam int unsigned DRAIN = 3;

  typedef enum logic [2:0] {
    PH_IDLE, PH_L1, PH_ACT, PH_L2, PH_SMX, PH_BWD, PH_UPD
  } phase_e;

  phase_e        phase;
  logic          draining;
  logic [1:0]    dcnt;
  logic          train_q;
  logic [BW-1:0] batch_q;
  logic [HLW-1:0] layers_q, layer;
  logic [15:0]   w1_base;  // first buffer1 word of the current layer
  logic          hid_in;   // current L1 pass takes hidden outputs as input
  logic [15:0]   grp;    // group / word counter of the phase
  logic [15:0]   k;      // element counter within a group
  logic [15:0]   kw, kl; // word and lane of element k in Tanh(S1) RAM
  logic          smx_seen_last;

  // ---- issue stage (combinational from the counters) ----
  logic iss_l1, iss_act, iss_l2, iss_bwd, iss_upd;
  logic last_k1, last_k2;
  assign iss_l1  = (phase == PH_L1)  && !draining;
  assign iss_act = (phase == PH_ACT) && !draining;
  assign iss_l2  = (phase == PH_L2)  && !draining;
  assign iss_bwd = (phase == PH_BWD) && !draining;
  assign iss_upd = (phase == PH_UPD) && !draining;
  assign hid_in  = (layer != '0);
  assign last_k1 = hid_in ? (32'(k) == N_HID) : (32'(k) == N_IN);
  assign last_k2 = (32'(k) == N_HID);

  assign x_re     = iss_l1 && !hid_in && !last_k1;
  assign x_raddr  = XA'(32'(sample) * N_IN + 32'(k));
  assign w1_re    = iss_l1;
  assign w1_raddr = W1A'(32'(w1_base) + 32'(grp) * (hid_in ? K2 : K1) + 32'(k));
  assign s1_re    = iss_act;
  assign s1_raddr = S1A'(grp);
  assign t_re     = ((iss_l2 || iss_bwd) && !last_k2) || (iss_l1 && hid_in && !last_k1);
  assign t_raddr  = S1A'(kw);
  assign w2_re    = iss_l2 || iss_upd;
  assign w2_raddr = iss_upd ? W2A'(grp) : W2A'(32'(grp) * K2 + 32'(k));
  assign e_re     = iss_bwd;
  assign e_raddr  = EA'(grp);
  assign label_re    = sm_out_valid;
  assign label_raddr = LBA'(32'(sample) * G2 + 32'(sm_out_group));
  assign acc_first   = (sample == '0);

  // ---- pipeline stages d1 and d2 ----
  logic           d1_hid;
  logic           d1_l1, d1_l1_first, d1_l1_last, d1_act, d1_l2, d1_l2_first, d1_l2_last;
  logic           d1_bwd, d1_last2, d1_upd, d1_sm;
  logic [15:0]    d1_grp, d1_kl;
  logic [W2A-1:0] d1_tag;
  logic [EA-1:0]  d1_smg;
  logic           d2_l1, d2_l2, d2_l2_lastgrp;
  logic [15:0]    d2_grp;
  logic           d1_l2_lastgrp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {d1_l1, d1_l1_first, d1_l1_last, d1_act, d1_l2, d1_l2_first, d1_l2_last} <= '0;
      {d1_bwd, d1_last2, d1_upd, d1_sm, d1_l2_lastgrp} <= '0;
      d1_grp <= '0; d1_kl <= '0; d1_tag <= '0; d1_smg <= '0; d1_hid <= 1'b0;
      {d2_l1, d2_l2, d2_l2_lastgrp} <= '0;
      d2_grp <= '0;
    end else begin
      d1_l1         <= iss_l1;
      d1_hid        <= hid_in;
      d1_l1_first   <= (k == '0);
      d1_l1_last    <= iss_l1 && last_k1;
      d1_act        <= iss_act;
      d1_l2         <= iss_l2;
      d1_l2_first   <= (k == '0);
      d1_l2_last    <= iss_l2 && last_k2;
      d1_l2_lastgrp <= (32'(grp) == G2 - 1);
      d1_bwd        <= iss_bwd;
      d1_last2      <= last_k2;
      d1_upd        <= iss_upd;
      d1_grp        <= grp;
      d1_kl         <= kl;
      d1_tag        <= iss_upd ? W2A'(grp) : W2A'(32'(grp) * K2 + 32'(k));
      d1_sm         <= sm_out_valid;
      d1_smg        <= sm_out_group;
      d2_l1         <= d1_l1_last;
      d2_l2         <= d1_l2_last;
      d2_l2_lastgrp <= d1_l2_lastgrp;
      d2_grp        <= d1_grp;
    end
  end

  assign mac1_en     = d1_l1;
  assign mac1_clear  = d1_l1 && d1_l1_first;
  assign mac1_one    = d1_l1_last;
  assign mac1_hid    = d1_l1 && d1_hid;
  assign tanh_valid  = d1_act;
  assign mac2_en     = d1_l2;
  assign mac2_clear  = d1_l2 && d1_l2_first;
  assign mac2_one    = d1_l2_last;
  assign t_lane      = LNA'(d1_kl);
  assign mult_valid  = d1_bwd;
  assign mult_one    = d1_bwd && d1_last2;
  assign mult_tag    = d1_tag;
  assign upd_en      = d1_upd;
  assign upd_addr    = d1_tag;
  assign e_we        = d1_sm;
  assign e_waddr     = d1_smg;
  assign s1_we       = d2_l1;
  assign s1_waddr    = S1A'(d2_grp);
  assign t_waddr     = S1A'(d2_grp);
  assign sm_in_valid = d2_l2;
  assign sm_in_last  = d2_l2 && d2_l2_lastgrp;
  assign sm_in_group = EA'(d2_grp);

  // ---- phase sequencing ----
  logic grp_end;  // last issue of the phase happens this cycle
  always_comb begin
    unique case (phase)
      PH_L1:   grp_end = last_k1 && (32'(grp) == G1 - 1);
      PH_ACT:  grp_end = (32'(grp) == G1 - 1);
      PH_L2:   grp_end = last_k2 && (32'(grp) == G2 - 1);
      PH_BWD:  grp_end = last_k2 && (32'(grp) == G2 - 1);
      PH_UPD:  grp_end = (32'(grp) == G2 * K2 - 1);
      default: grp_end = 1'b0;
    endcase
  end

  function automatic logic [15:0] inc16(input logic [15:0] v);
    return v + 16'd1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE; draining <= 1'b0; dcnt <= '0;
      train_q <= 1'b0; batch_q <= '0; sample <= '0;
      layers_q <= '0; layer <= '0; w1_base <= '0;
      grp <= '0; k <= '0; kw <= '0; kl <= '0;
      busy <= 1'b0; done <= 1'b0; smx_seen_last <= 1'b0;
    end else begin
      done <= 1'b0;
      if (phase == PH_IDLE) begin
        if (start) begin
          phase   <= PH_L1;
          busy    <= 1'b1;
          train_q <= train;
          batch_q <= (batch == '0) ? BW'(1) : batch;
          layers_q <= (layers == '0) ? HLW'(1) : ((32'(layers) > MAX_HL) ? HLW'(MAX_HL) : layers);
          layer   <= '0;
          w1_base <= '0;
          sample  <= '0;
          grp <= '0; k <= '0; kw <= '0; kl <= '0;
          draining <= 1'b0;
        end
      end else if (phase == PH_SMX) begin
        // wait for all softmax outputs, then one cycle for the last error write
        if (sm_out_valid && sm_out_last) smx_seen_last <= 1'b1;
        if (smx_seen_last) begin
          smx_seen_last <= 1'b0;
          grp <= '0; k <= '0; kw <= '0; kl <= '0;
          if (train_q) begin
            phase <= PH_BWD;
          end else if (32'(sample) + 1 < 32'(batch_q)) begin
            sample <= sample + 1'b1;
            phase  <= PH_L1;
          end else begin
            phase <= PH_IDLE; busy <= 1'b0; done <= 1'b1;
          end
        end
      end else if (draining) begin
        dcnt <= dcnt + 1'b1;
        if (32'(dcnt) == DRAIN - 1) begin
          draining <= 1'b0;
          dcnt     <= '0;
          grp <= '0; k <= '0; kw <= '0; kl <= '0;
          unique case (phase)
            PH_L1:  phase <= PH_ACT;
            PH_ACT: begin
              if (32'(layer) + 1 < 32'(layers_q)) begin
                // next hidden layer: back to the first mult-add bank
                layer   <= layer + 1'b1;
                w1_base <= (layer == '0) ? 16'(G1 * K1) : w1_base + 16'(G1 * K2);
                phase   <= PH_L1;
              end else begin
                layer   <= '0;
                w1_base <= '0;
                phase   <= PH_L2;
              end
            end
            PH_L2:  phase <= PH_SMX;
            PH_BWD: begin
              if (32'(sample) + 1 < 32'(batch_q)) begin
                sample <= sample + 1'b1;
                phase  <= PH_L1;
              end else begin
                phase <= PH_UPD;
              end
            end
            PH_UPD: begin
              phase <= PH_IDLE; busy <= 1'b0; done <= 1'b1;
            end
            default: phase <= PH_IDLE;
          endcase
        end
      end else begin
        // issuing: advance the counters
        if (grp_end) draining <= 1'b1;
        unique case (phase)
          PH_L1, PH_L2, PH_BWD: begin
            if ((phase == PH_L1) ? last_k1 : last_k2) begin
              k <= '0; kw <= '0; kl <= '0; grp <= inc16(grp);
            end else begin
              k <= inc16(k);
              if (32'(kl) == L1 - 1) begin kl <= '0; kw <= inc16(kw); end
              else kl <= inc16(kl);
            end
          end
          default: grp <= inc16(grp);  // PH_ACT, PH_UPD
        endcase
      end
    end
  end

  // The sequencer never reads a Tanh(S1) word beyond the stored ones.
  assert property (@(posedge clk) disable iff (!rst_n) t_re |-> 32'(t_raddr) < G1);
  // Softmax results arrive only while the sequencer waits for them.
  assert property (@(posedge clk) disable iff (!rst_n) sm_out_valid |-> phase == PH_SMX);

endmodule
