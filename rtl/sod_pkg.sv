// sod_pkg: constants and types shared by the Sparse-on-Dense accelerator.
//
// The main configuration is a 64 x 64 (4096-PE) weight-stationary systolic
// array, 16-bit inputs and weights, 8-bit non-zero indices and 8-bit CSC
// pointers, and a 2 MB global buffer; these numbers follow the published
// design. The psum width (32 bits), the global-buffer word width (one dense
// PE-array vector, 64 x 16 = 1024 bits), the non-zero entries per word
// (floor(1024 / 24) = 42) and the accumulator depth (128 rows) are this
// design's own choices.
package sod_pkg;
  parameter int N         = 64;            // PE rows = PE columns
  parameter int DATA_W    = 16;            // input / weight precision
  parameter int IDX_W     = 8;             // non-zero row index
  parameter int PTR_W     = 8;             // CSC column pointer
  parameter int PSUM_W    = 32;            // psum / accumulator lane
  parameter int GB_W      = N * DATA_W;    // global-buffer word
  parameter int GB_BYTES  = 2 * 1024 * 1024;
  parameter int GB_DEPTH  = GB_BYTES / (GB_W / 8);
  parameter int ADDR_W    = 16;            // word address width on all ports
  parameter int NZ_W      = IDX_W + DATA_W;
  parameter int NZ_L      = GB_W / NZ_W;   // non-zero entries per word
  parameter int ACC_DEPTH = 128;           // accumulator rows (vectors per pass)
  parameter int CNT_W     = 8;             // vector-count fields

  // One compressed non-zero entry as stored in a global-buffer word.
  typedef struct packed {
    logic [DATA_W-1:0] val;
    logic [IDX_W-1:0]  idx;
  } nz_entry_t;

  // One pass of the accelerator: a weight tile times up to n_vec input vectors.
  typedef struct packed {
    logic [ADDR_W-1:0] w_base;     // weight tile: dense words or CSC block
    logic              w_sparse;   // 1: weights stored in CSC
    logic [ADDR_W-1:0] i_base;     // input vectors: dense words or CSC block
    logic              i_sparse;   // 1: inputs stored in CSC
    logic [CNT_W-1:0]  n_vec;      // number of input vectors (1..ACC_DEPTH)
    logic              acc_first;  // 1: overwrite accumulator rows, 0: add
    logic              wb_en;      // 1: write accumulator rows back at the end
    logic [ADDR_W-1:0] out_base;   // write-back address
  } sod_cmd_t;

  typedef enum logic [2:0] {
    C_IDLE, C_LOAD_W, C_COMMIT, C_STREAM, C_WB_RD, C_WB_WR, C_DONE
  } ctrl_state_e;

  typedef enum logic [1:0] {D_IDLE, D_PTR, D_RUN} decomp_state_e;
endpackage
