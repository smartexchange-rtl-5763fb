// se_pkg: sizes, encodings and the instruction format shared by the
// SmartExchange-style accelerator.
//
// Array sizes follow the accelerator's published resource table: 64 PE slices
// (DIM_M), 16 PE lines per slice (DIM_C), 8 bit-serial MACs per line (DIM_F),
// 8-bit activations, 8-bit basis elements and 4-bit coefficients, a 16 KB x 32
// bank input global buffer, 2 KB x 2 bank output global buffer and a 2 KB x 2
// bank weight buffer per slice. The kernel width S = 3 is the 3x3 kernel the
// decomposition is applied to (the basis matrix is S x S).
//
// Encodings chosen by this design (not fixed by the source):
//   * coefficient: 4 bits {sign, k[2:0]}, value = sign ? -2^-k : 2^-k, with
//     k = 7 meaning zero. A product coefficient x basis is then an arithmetic
//     right shift of the basis element, which is what the rebuild engine does.
//   * weight-buffer slot: 24 bits per PE line. It carries either one basis
//     row (S x 8 bits), one original weight row (S x 8 bits), or up to two
//     coefficient rows (S x 4 bits each, low half for RE A, high half for RE B).
//   * input GB word: one input row segment of DIM_F+S-1 activations, the
//     length of a PE line's input FIFO.
package se_pkg;

  // ---------------------------------------------------------------- array
  parameter int unsigned DIM_M   = 64;  // PE slices (output channels in parallel)
  parameter int unsigned DIM_C   = 16;  // PE lines per slice (input channels in parallel)
  parameter int unsigned DIM_F   = 8;   // MACs per PE line (output pixels of one row)
  parameter int unsigned KS      = 3;   // kernel width S (= basis matrix size)
  parameter int unsigned ROW_LEN = DIM_F + KS - 1;  // input FIFO length

  // ---------------------------------------------------------------- precision
  parameter int unsigned ACT_W   = 8;   // activation
  parameter int unsigned BAS_W   = 8;   // basis element
  parameter int unsigned COEF_W  = 4;   // coefficient
  parameter int unsigned WGT_W   = 8;   // rebuilt / original weight
  parameter int unsigned PSUM_W  = 24;  // MAC partial sum
  parameter int unsigned ACC_W   = 32;  // slice accumulation buffer
  parameter int unsigned OUT_W   = 8;   // stored output activation

  parameter int unsigned SLOT_W  = KS * BAS_W;   // 24-bit weight-buffer slot
  parameter int unsigned CROW_W  = KS * COEF_W;  // 12-bit coefficient row

  // ---------------------------------------------------------------- buffers
  parameter int unsigned IN_BANKS      = 32;
  parameter int unsigned IN_BANK_BYTES = 16384;
  parameter int unsigned IN_DEPTH      = IN_BANK_BYTES / ROW_LEN;  // 1638 rows/bank

  parameter int unsigned WB_BANKS      = 2;
  parameter int unsigned WB_BANK_BYTES = 2048;
  parameter int unsigned WB_WORD_W     = DIM_C * SLOT_W;                   // 384 bits
  parameter int unsigned WB_DEPTH      = WB_BANKS * ((WB_BANK_BYTES * 8) / WB_WORD_W); // 84

  parameter int unsigned OUT_BANKS      = 2;
  parameter int unsigned OUT_BANK_BYTES = 2048;
  parameter int unsigned OUT_WORD_W     = DIM_F * OUT_W;                    // 64 bits
  parameter int unsigned OUT_DEPTH      = OUT_BANKS * (OUT_BANK_BYTES * 8 / OUT_WORD_W); // 512

  parameter int unsigned WIDX_DEPTH    = 512;           // not given by the source
  parameter int unsigned WIDX_W        = DIM_C * KS;    // one bit per (line, kernel row)

  parameter int unsigned IMEM_DEPTH    = 64;            // instruction memory

  // coefficient code meaning "zero"
  parameter logic [2:0] COEF_ZERO_K = 3'd7;

  // ---------------------------------------------------------------- enums
  // What the rebuild engine's MUX1 is loading.
  typedef enum logic [1:0] {
    LD_COEF  = 2'd0,   // path 1: one coefficient row
    LD_BASIS = 2'd1,   // path 2: one basis row
    LD_RAW   = 2'd2    // path 3: one original weight row (layers not decomposed)
  } ld_type_e;

  // Layer mapping onto the PE lines.
  typedef enum logic [1:0] {
    MODE_CONV    = 2'd0,  // 2D CONV: line c = input channel c, jobs = kernel rows
    MODE_DW      = 2'd1,  // depth-wise CONV: line c = kernel row c of one channel
    MODE_CLUSTER = 2'd2   // FC / squeeze-excite: MACs split into two clusters, one per RE
  } mode_e;

  typedef enum logic [1:0] {
    OP_END   = 2'd0,
    OP_BASIS = 2'd1,   // load one basis matrix into one RE of every line
    OP_CONV  = 2'd2    // run one pass
  } opcode_e;

  // One instruction. Address fields are in words of the buffer they index.
  typedef struct packed {
    opcode_e      op;
    mode_e        mode;
    logic         raw;        // jobs use original weights (MUX1/MUX2 path 3)
    logic         relu;       // apply ReLU at emission
    logic [3:0]   shift;      // arithmetic right shift before saturating to 8 bits
    logic         re_tgt;     // OP_BASIS: RE written (0 = A, 1 = B)
    logic [1:0]   rows;       // R, kernel rows used (1..KS)
    logic [7:0]   n_e;        // output rows in this pass
    logic [5:0]   n_g;        // input channel groups of DIM_C channels
    logic [9:0]   dw_ch;      // MODE_DW: the channel processed
    logic [10:0]  in_base;    // first row address in every input bank
    logic [10:0]  h_stride;   // rows per channel in a bank
    logic [8:0]   widx_base;  // first weight-index word
    logic [6:0]   wb_base;    // first weight-buffer word (coefficients / basis)
    logic [8:0]   out_base;   // first output GB word
    logic         nb_valid;   // OP_CONV: prefetch the next basis during the pass
    logic [6:0]   nb_addr;    // its first weight-buffer word
  } instr_t;

  // Saturate a signed value to a signed W-bit result.
  function automatic logic signed [WGT_W-1:0] sat_wgt(input logic signed [15:0] v);
    if (v > 16'sd127)       return 8'sd127;
    else if (v < -16'sd128) return -8'sd128;
    else                    return v[WGT_W-1:0];
  endfunction

  function automatic logic signed [OUT_W-1:0] sat_out(input logic signed [ACC_W-1:0] v);
    if (v > 32'sd127)       return 8'sd127;
    else if (v < -32'sd128) return -8'sd128;
    else                    return v[OUT_W-1:0];
  endfunction

endpackage
