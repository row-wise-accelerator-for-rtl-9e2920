// vit_pkg: sizes, types and small arithmetic helpers shared by the
// row-wise vision-transformer accelerator.
//
// Array shape (follows the paper): 12 PE blocks, each with 7 PE rows of
// 4 multiply-accumulate units, 8-bit signed weights and activations.
// 12 x 7 x 4 = 336 MACs, i.e. 403.2 GOPS at 600 MHz.
// Memory shape (derived from the paper's sizes): 48 input banks of
// 224 words x 56 bits (1.57 KB each) and 2 x 12 weight banks of 768 words
// x 32 bits (3.07 KB each).  Everything else here (accumulator width, output
// buffer depth, command format, requantisation) is this design's own choice.
package vit_pkg;

  localparam int unsigned N_BLK   = 12;   // PE blocks
  localparam int unsigned N_ROW   = 7;    // PE rows per block (= outputs per cycle)
  localparam int unsigned N_MAC   = 4;    // MACs per row (= dot product length)
  localparam int unsigned DW      = 8;    // weight / activation width
  localparam int unsigned N_IBANK = N_BLK * N_MAC;  // 48 input banks

  localparam int unsigned IN_DEPTH  = 224;  // words per input bank
  localparam int unsigned W_DEPTH   = 768;  // words per weight bank
  localparam int unsigned OUT_DEPTH = 1024; // words in the output buffer

  localparam int unsigned IN_AW  = $clog2(IN_DEPTH);
  localparam int unsigned W_AW   = $clog2(W_DEPTH);
  localparam int unsigned OUT_AW = $clog2(OUT_DEPTH);

  localparam int unsigned PSUM_W = 2*DW + 2;   // 4-term dot product: 18 bits
  localparam int unsigned ACC_W  = 32;         // accumulator and adder tree width

  localparam int unsigned ROW_W  = N_ROW * DW; // 56-bit input / output word
  localparam int unsigned WVEC_W = N_MAC * DW; // 32-bit weight word

  typedef logic signed [DW-1:0]     act_t;
  typedef logic signed [PSUM_W-1:0] psum_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Operation selected by a command.
  typedef enum logic [1:0] {
    OP_MATMUL    = 2'd0,  // convolution, fully connected or Q*K^T pass
    OP_LAYERNORM = 2'd1,
    OP_SOFTMAX   = 2'd2
  } op_e;

  // Targets of the on-chip data bus write side.
  typedef enum logic [1:0] {
    BUS_INPUT   = 2'd0,
    BUS_WEIGHT0 = 2'd1,
    BUS_WEIGHT1 = 2'd2
  } bus_target_e;

  // Command for one pass of the array (OP_MATMUL) or of a post-processing
  // unit (OP_LAYERNORM, OP_SOFTMAX).
  typedef struct packed {
    op_e                op;
    // OP_MATMUL fields
    logic [9:0]         n_k;      // input-word cycles accumulated per output (1..)
    logic [9:0]         n_g;      // token groups of 7 rows (1..)
    logic [9:0]         n_oc;     // output channels (1..)
    logic [N_BLK-1:0]   blk_mask; // PE blocks summed by the adder tree
    logic [4:0]         shift;    // requantisation right shift
    logic               wsel;     // weight SRAM set read by the array
    logic [IN_AW-1:0]   in_base;
    logic [W_AW-1:0]    w_base;
    // shared by all operations: output buffer base address
    logic [OUT_AW-1:0]  out_base;
    // OP_LAYERNORM / OP_SOFTMAX fields: words of the vector and their stride
    logic [OUT_AW:0]    len;
    logic [OUT_AW-1:0]  stride;
  } cmd_t;

  // Arithmetic right shift with saturation to a signed 8-bit value.
  function automatic act_t requant(input acc_t v, input logic [4:0] sh);
    acc_t s;
    s = v >>> sh;
    if (s > acc_t'(127))       return act_t'(127);
    else if (s < acc_t'(-128)) return act_t'(-128);
    else                       return act_t'(s);
  endfunction

endpackage
