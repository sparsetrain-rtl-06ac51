// Shared types and constants of the sparse training accelerator.
//
// Numbers: activations, weights and gradients are 16-bit signed fixed point
// with FRAC fraction bits; partial sums are 32-bit. A buffer word is 32 bits.
// In the compressed row format a word is {column index[31:16], value[15:0]}
// and only non-zeros are stored; a word whose value is zero carries no data
// and is used only to terminate a row that has no non-zero left to carry
// the "last" flag. In the dense format a word is {16'b0, value}.
// These widths and formats are this design's choices; the paper fixes none.
package st_pkg;

  localparam int DATA_W  = 16;
  localparam int IDX_W   = 16;
  localparam int PSUM_W  = 32;
  localparam int WORD_W  = 32;
  localparam int FRAC    = 8;
  localparam int KMAX    = 11;   // largest kernel row held in Reg-1 / Reg-2
  localparam int ACC_W   = 40;   // PPU accumulators
  localparam int PES     = 3;    // PEs per group
  localparam int NPORTS  = 3*PES; // operand streams per group

  // The three basic row operations of the dataflow.
  typedef enum logic [1:0] {
    OP_SRC  = 2'd0,   // Sparse Row Convolution (Forward)
    OP_MSRC = 2'd1,   // Masked Sparse Row Convolution (GTA)
    OP_OSRC = 2'd2    // Output Store Row Convolution (GTW)
  } op_e;

  // Configuration of one row operation, shared by the PEs of a group.
  typedef struct packed {
    op_e              op;
    logic [3:0]       k;        // kernel row length, 1..KMAX
    logic [3:0]       pad;      // zero padding on the left of the input row
    logic [IDX_W-1:0] out_len;  // output row length (SRC/MSRC)
    logic             p1_dense; // Port-1 stream is dense (else compressed)
    logic             p2_dense; // Port-2 stream is dense
    logic             p3_dense; // Port-3 stream is dense
  } pe_cfg_t;

  // Post-processing configuration.
  typedef struct packed {
    logic             relu_en;  // "Need ReLU?"
    logic             prune_en; // stochastic pruning requested
    logic [IDX_W-1:0] out_len;  // words expected per PPU row
  } ppu_cfg_t;

  function automatic logic [WORD_W-1:0] pack_elem(logic [IDX_W-1:0] idx,
                                                  logic signed [DATA_W-1:0] val);
    return {idx, val};
  endfunction

endpackage
