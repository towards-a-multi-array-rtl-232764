// mm_pkg: types and constants shared by the multi-array matrix-multiplication
// accelerator.
//
// Data are IEEE-754 single precision (32 bit) words, which matches the
// 4-byte element size used in the load-time model of the architecture.
// The stream token formats below are this design's own choice: every token
// carries the small amount of control (indices and flags) the PEs need, so
// that tokens of two consecutive workloads may be in flight in one array.
package mm_pkg;

  // Array geometry (architecture defaults: 4 arrays of 64 PEs).
  localparam int unsigned P_M_DEF   = 4;     // number of PE arrays
  localparam int unsigned P_DEF     = 64;    // PEs per array
  // Largest block size: 4*P when all arrays are chained (S_i = S_j).
  localparam int unsigned BZ_MAX    = 256;
  localparam int unsigned IDXW      = 8;     // index of a row/column in a block
  localparam int unsigned BZW       = 9;     // block size 1..256
  localparam int unsigned ADDRW     = 32;    // word address
  localparam int unsigned KW        = 16;    // ITER_K width

  // FMAC pipeline depths.
  localparam int unsigned FMUL_LAT  = 2;
  localparam int unsigned FADD_LAT  = 3;
  // Minimum distance, in cycles, between two reads of the same M_c word
  // (read-modify-write of the partial sum through the adder).
  localparam int unsigned ACC_GAP   = FADD_LAT + 2;

  typedef logic [31:0] fp32_t;

  // Element of stream A (column of SA, i.e. a row of the transposed A).
  typedef struct packed {
    fp32_t           data;
    logic [IDXW-1:0] idx;     // row index i inside the block (target PID)
    logic [IDXW-1:0] si_m1;   // S_i - 1 of the workload it belongs to
  } a_tok_t;

  // Element of stream B (row of SB).
  typedef struct packed {
    fp32_t           data;
    logic [IDXW-1:0] col;       // column index j inside the block
    logic [IDXW-1:0] si_m1;     // S_i - 1 of the workload
    logic            row_first; // first element of row k
    logic            row_last;  // last element of row k
    logic            first_it;  // k == 1: no previous partial sum
    logic            last_it;   // k == K: result goes to f_c
  } b_tok_t;

  // Element of stream C (results, row-major inside the block).
  typedef struct packed {
    fp32_t data;
    logic  last;      // last element of the whole C block
  } c_tok_t;

  // Buffer descriptor (one task = one sub-block multiplication).
  typedef struct packed {
    logic [ADDRW-1:0] addr_a;  // SA^T base (A is stored transposed)
    logic [ADDRW-1:0] str_a;   // stride between rows of A^T
    logic [BZW-1:0]   bz_a;    // S_i
    logic [ADDRW-1:0] addr_b;  // SB base
    logic [ADDRW-1:0] str_b;   // stride between rows of B
    logic [BZW-1:0]   bz_b;    // S_j
    logic [KW-1:0]    iter_k;  // K
    logic [ADDRW-1:0] addr_c;  // C_{i,j} base
    logic [ADDRW-1:0] str_c;   // stride between rows of C
  } desc_t;

endpackage
