// Shared types and constants of the fluid-antenna GNN accelerator.
//
// The accelerator is driven by a CISC-style instruction stream with three
// instruction classes: memory access, matrix processing and post processing.
// The classes and the post-processing operations (MADD, ReLU, max-pooling,
// concatenation, normalization) follow the published architecture; the bit
// layout of the 128-bit instruction word, the sub-opcodes and the wait mask
// used for dependency control are this design's own choice, since no encoding
// was published. Data are 8-bit signed fixed point, as in the published
// prototype; accumulators are 32 bits wide (own choice).
package fas_pkg;

  localparam int unsigned DATA_W  = 8;    // activation / weight width
  localparam int unsigned ACC_W   = 32;   // accumulator width
  localparam int unsigned BEAT_W  = 64;   // off-chip memory bus width
  localparam int unsigned RG      = 4;    // rows packed in one activation word
  localparam int unsigned AWORD_W = RG * DATA_W;  // activation word: 4 rows of one column

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [BEAT_W-1:0]        beat_t;
  typedef logic [AWORD_W-1:0]       aword_t;

  // instruction classes
  typedef enum logic [1:0] {
    IT_MEM  = 2'd0,   // memory access (read or write selected by sub-opcode)
    IT_MM   = 2'd1,   // matrix processing on the systolic arrays
    IT_POST = 2'd2,   // post processing
    IT_CTRL = 2'd3    // end of program
  } itype_e;

  // memory-type field of a memory access instruction
  typedef enum logic [3:0] {
    MEM_RD_W  = 4'd0,  // DDR -> weight region of a double-buffer bank
    MEM_RD_IN = 4'd1,  // DDR -> input region of a double-buffer bank
    MEM_RD_B  = 4'd2,  // DDR -> bias region of a double-buffer bank
    MEM_WR    = 4'd3   // intermediate buffer -> DDR
  } mem_sub_e;

  // post-processing operations
  typedef enum logic [3:0] {
    PP_MADD   = 4'd0,  // accumulator + bias, optional ReLU, requantize
    PP_MAXP   = 4'd1,  // max over the other rows of each group
    PP_CONCAT = 4'd2,  // copy a column range next to another one
    PP_NORM   = 4'd3   // scale each group to a given Frobenius norm
  } pp_sub_e;

  // functional units, bit positions in wait masks and busy vectors
  localparam int unsigned U_MRD  = 0;
  localparam int unsigned U_MM   = 1;
  localparam int unsigned U_POST = 2;
  localparam int unsigned U_MWR  = 3;
  localparam int unsigned NUNITS = 4;

  // Performance events brought out of the top level, one pulse per event.
  localparam int EV_OVERLAP  = 0;   // cycle with a memory read and a matrix operation both running
  localparam int EV_MM_B0    = 1;   // matrix operation on double-buffer bank 0
  localparam int EV_MM_B1    = 2;   // matrix operation on bank 1
  localparam int EV_MM_ACC   = 3;   // matrix operation accumulating onto earlier partial sums
  localparam int EV_MM_MULTI = 4;   // matrix operation over more than one row group
  localparam int EV_MADD_R   = 5;   // bias add with ReLU
  localparam int EV_MADD_L   = 6;   // bias add without ReLU
  localparam int EV_MAXP     = 7;
  localparam int EV_CONCAT   = 8;
  localparam int EV_NORM     = 9;
  localparam int EV_LD_IN    = 10;  // input (channel feature) load
  localparam int EV_MWR      = 11;  // result write-back
  localparam int EV_SAT      = 12;  // post-processing result word holding a saturated byte
  localparam int NEV         = 13;

  // 128-bit instruction word, fetched as two 64-bit beats (low beat first)
  typedef struct packed {
    logic [1:0]  typ;        // itype_e
    logic [3:0]  sub;        // mem_sub_e or pp_sub_e
    logic [3:0]  wait_mask;  // units that must be idle before dispatch
    logic        bank;       // double-buffer bank
    logic        relu;       // MADD: apply ReLU
    logic        acc;        // MM: add to accumulator instead of overwriting
    logic        src_sel;    // MM: 0 = input region, 1 = intermediate buffer
    logic [31:0] ddr_addr;   // byte address in off-chip memory
    logic [4:0]  rows;       // number of matrix rows (UEs x port selections)
    logic [10:0] depth;      // MM: reduction length; MEM_RD_W: tile rows
    logic [10:0] cols;       // number of columns
    logic [11:0] src_col;    // source column
    logic [11:0] dst_col;    // destination column
    logic [3:0]  shift;      // MADD: requantization right shift
    logic [4:0]  group;      // MAXP / NORM: rows per task (UEs per cell)
    logic [15:0] imm;        // MM: first weight row; MEM_RD_IN: first row group;
                             // MADD: bias byte offset; NORM: target norm
    logic [5:0]  pad;
  } inst_t;

  // saturate a wide signed value to the 8-bit data range
  function automatic data_t sat8(input logic signed [47:0] v);
    if (v > 48'sd127)       return data_t'(8'sd127);
    else if (v < -48'sd128) return data_t'(-8'sd128);
    else                    return data_t'(v[7:0]);
  endfunction

endpackage
