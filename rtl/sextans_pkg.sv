// sextans_pkg: constants and types shared by the Sextans SpMM accelerator.
//
// The accelerator computes C = alpha*A*B + beta*C for a sparse A (M x K) and
// dense B (K x N), C (M x N), all FP32. The numbers below are the ones of the
// published FPGA configuration: 8 processing-engine groups (PEGs) of 8 PEs
// (P = 64), N0 = 8 processing units (PUs) per PE, a B window of K0 = 4096 rows,
// a C scratchpad of 12288 entries per PU, FIFO depth 8, F_B = 4 and F_C = 16.
//
// A non-zero is packed into 64 bits ("a-64b"): a 14-bit compressed column
// index, an 18-bit compressed row index and the 32-bit FP32 value. The field
// widths follow the paper; the bit order (col in the top bits, value in the
// low bits) and the bubble code (column index all ones) are this design's
// own choice.
package sextans_pkg;

  localparam int unsigned FP_W      = 32;   // FP32 everywhere
  localparam int unsigned A_COL_W   = 14;   // a_col field width
  localparam int unsigned A_ROW_W   = 18;   // a_row field width
  localparam int unsigned A_W       = 64;   // a-64b
  localparam int unsigned HBM_W     = 512;  // one HBM channel word
  localparam int unsigned ADDR_W    = 32;   // word address on one channel
  localparam int unsigned FIFO_D    = 8;    // depth of every inter-module FIFO

  // A scheduled slot that carries no non-zero (a pipeline bubble).
  localparam logic [A_COL_W-1:0] BUBBLE_COL = '1;

  typedef logic [FP_W-1:0] fp32_t;

  typedef struct packed {
    logic [A_COL_W-1:0] col;
    logic [A_ROW_W-1:0] row;
    fp32_t              val;
  } a64_t;

  // Run-time problem description, the scalars the host passes to the kernel.
  typedef struct packed {
    logic [31:0] m;          // rows of A and C
    logic [31:0] k;          // columns of A, rows of B
    logic [31:0] n;          // columns of B and C
    fp32_t       alpha;
    fp32_t       beta;
    logic [31:0] a_len;      // length of each PEG's scheduled list = Q[K/K0]
    logic [ADDR_W-1:0] ptr_base;
    logic [ADDR_W-1:0] a_base;
    logic [ADDR_W-1:0] b_base;
    logic [ADDR_W-1:0] c_in_base;
    logic [ADDR_W-1:0] c_out_base;
  } cfg_t;

  function automatic logic [31:0] ceil_shift(input logic [31:0] x, input int unsigned sh);
    logic [32:0] t;
    t = {1'b0, x} + ((33'd1 << sh) - 33'd1);
    return 32'(t >> sh);
  endfunction

endpackage
