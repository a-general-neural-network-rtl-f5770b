// gnn_pkg: number formats and small helpers shared by the neural-network engine.
//
// All activations, weights, labels and errors are 16-bit two's-complement
// fixed-point numbers with 8 fraction bits (Q8.8, 1.0 = 256). Products of two
// Q8.8 numbers are Q16.16 and are summed in 40-bit accumulators. These formats
// are this design's own choice; the architecture they serve follows the
// block diagram of a general neural-network accelerator (forward mult-add
// banks, look-up-table activations, LUT softmax, outer-product weight update).
package gnn_pkg;

  localparam int unsigned DW     = 16;   // data word (Q8.8)
  localparam int unsigned FRAC   = 8;    // fraction bits of a data word
  localparam int unsigned PROD_W = 2*DW; // Q16.16 product
  localparam int unsigned ACC_W  = 40;   // accumulator width

  typedef logic signed [DW-1:0]     data_t;
  typedef logic signed [PROD_W-1:0] prod_t;

  localparam data_t ONE = data_t'(1 << FRAC); // 1.0, the constant bias input

  // Host-side selector of the memory a load or read-back addresses.
  typedef enum logic [2:0] {
    SEL_X     = 3'd0,  // buffer0: input vectors
    SEL_W1    = 3'd1,  // buffer1: input-to-hidden weights
    SEL_W2    = 3'd2,  // hidden-to-output weight buffer
    SEL_LABEL = 3'd3,  // label buffer
    SEL_TANH  = 3'd4,  // activation look-up table
    SEL_EXP   = 3'd5   // exponential look-up table
  } host_sel_e;

  // Address width of a memory of the given depth (at least one bit).
  function automatic int unsigned addr_w(input int unsigned depth);
    return (depth > 1) ? $clog2(depth) : 1;
  endfunction

  // Saturate a signed value (sign-extended to 64 bits) to a Q8.8 data word.
  function automatic data_t sat_data(input logic signed [63:0] v);
    if (v > 64'sd32767)       return data_t'(16'sh7fff);
    else if (v < -64'sd32768) return data_t'(16'sh8000);
    else                      return data_t'(v);
  endfunction

endpackage
