// sod_top: the Sparse-on-Dense accelerator.
//
// A dense, TPU-style weight-stationary systolic array computes sparse neural
// network layers: weights and inputs are kept in the global buffer in CSC
// form (or dense), and a decompression unit on each operand path expands them
// into dense vectors just before the PE array; dense operands bypass the
// decompression units. The accumulator adds the array's outputs to the
// previous results, and the controller sequences passes.
//
//   global buffer --rd0--> weight operand path --w_in--> PE array --> accumulator
//                 --rd1--> input  operand path --x_in-->            (write-back
//                 <--wr--- controller write-back <------------------  to buffer)
//
// Matrix convention: weight vector m (the m-th vector delivered, i.e. CSC
// column m of the stored weight matrix M) ends in PE row N-1-m, and input
// element m drives PE row N-1-m, so each input vector x gives y = M * x,
// y[c] for PE column c. Accumulator row t holds the result of the t-th input
// vector; with write-back, row t is stored as WPR words from out_base + t*WPR,
// word h holding y[h*W/PW ...] as PW-bit lanes.
// Host ports: host_wr_* writes a global-buffer word (only while idle);
// host_rd_* reads one (data one cycle later, only while idle). cmd_valid with
// cmd starts a pass while busy is low; done pulses at its end.
// The block structure follows the published design; host ports, command
// format, memory layout and the matrix convention are this design's choices.
module sod_top
  import sod_pkg::*;
#(
  parameter int N_EL     = sod_pkg::N,
  parameter int GB_D     = sod_pkg::GB_DEPTH,
  parameter int ACC_D    = sod_pkg::ACC_DEPTH,
  localparam int W       = N_EL * DATA_W,
  localparam int L       = W / NZ_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               host_wr_en,
  input  logic [ADDR_W-1:0]  host_wr_addr,
  input  logic [W-1:0]       host_wr_data,
  input  logic               host_rd_en,
  input  logic [ADDR_W-1:0]  host_rd_addr,
  output logic [W-1:0]       host_rd_data,
  input  logic               cmd_valid,
  input  sod_cmd_t           cmd,
  output logic               busy,
  output logic               done
);
  localparam int AW  = $clog2(ACC_D);
  localparam int ACW = $clog2(ACC_D + 1);

  // global buffer ports
  logic [1:0]             gb_rd_en;
  logic [1:0][ADDR_W-1:0] gb_rd_addr;
  logic [1:0][W-1:0]      gb_rd_data;
  logic                   gb_wr_en, wb_en;
  logic [ADDR_W-1:0]      gb_wr_addr, wb_addr;
  logic [W-1:0]           gb_wr_data, wb_data;

  // operand paths
  logic                        w_start, w_sparse, w_rd_en, w_vec_valid, w_busy, w_commit;
  logic [ADDR_W-1:0]           w_base, w_rd_addr;
  logic [CNT_W-1:0]            w_nvec;
  logic [N_EL-1:0][DATA_W-1:0] w_vec;
  logic                        i_start, i_sparse, i_rd_en, i_vec_valid, i_busy;
  logic [ADDR_W-1:0]           i_base, i_rd_addr;
  logic [CNT_W-1:0]            i_nvec;
  logic [N_EL-1:0][DATA_W-1:0] i_vec, x_rows;

  // array and accumulator
  logic                        y_valid, acc_start, acc_first, acc_rd_en;
  logic [N_EL-1:0][PSUM_W-1:0] y_out, acc_rd_data;
  logic [ACW-1:0]              acc_count;
  logic [AW-1:0]               acc_rd_addr;
  ctrl_state_e                 ctrl_state;

  sod_global_buffer #(.W(W), .DEPTH(GB_D), .NRD(2)) u_gb (
    .clk, .rd_en(gb_rd_en), .rd_addr(gb_rd_addr), .rd_data(gb_rd_data),
    .wr_en(gb_wr_en), .wr_addr(gb_wr_addr), .wr_data(gb_wr_data)
  );

  assign gb_rd_en[0]   = w_rd_en;
  assign gb_rd_addr[0] = w_rd_addr;
  assign gb_rd_en[1]   = busy ? i_rd_en   : host_rd_en;
  assign gb_rd_addr[1] = busy ? i_rd_addr : host_rd_addr;
  assign host_rd_data  = gb_rd_data[1];
  assign gb_wr_en      = wb_en || host_wr_en;
  assign gb_wr_addr    = wb_en ? wb_addr : host_wr_addr;
  assign gb_wr_data    = wb_en ? wb_data : host_wr_data;

  sod_operand_path #(.N_EL(N_EL), .DW(DATA_W), .W(W), .L(L)) u_wpath (
    .clk, .rst_n, .start(w_start), .sparse(w_sparse), .base(w_base), .nvec(w_nvec),
    .rd_en(w_rd_en), .rd_addr(w_rd_addr), .rd_data(gb_rd_data[0]),
    .vec_valid(w_vec_valid), .vec(w_vec), .busy(w_busy)
  );

  sod_operand_path #(.N_EL(N_EL), .DW(DATA_W), .W(W), .L(L)) u_ipath (
    .clk, .rst_n, .start(i_start), .sparse(i_sparse), .base(i_base), .nvec(i_nvec),
    .rd_en(i_rd_en), .rd_addr(i_rd_addr), .rd_data(gb_rd_data[1]),
    .vec_valid(i_vec_valid), .vec(i_vec), .busy(i_busy)
  );

  // input element m drives PE row N-1-m (see matrix convention above)
  for (genvar r = 0; r < N_EL; r++) begin : g_xmap
    assign x_rows[r] = i_vec[N_EL-1-r];
  end

  sod_pe_array #(.N_ROWS(N_EL), .N_COLS(N_EL), .DW(DATA_W), .PW(PSUM_W)) u_array (
    .clk, .rst_n, .w_shift(w_vec_valid), .w_commit, .w_in(w_vec),
    .x_valid(i_vec_valid), .x_in(x_rows), .y_valid, .y_out
  );

  sod_accumulator #(.N_COLS(N_EL), .PW(PSUM_W), .DEPTH(ACC_D)) u_acc (
    .clk, .rst_n, .start(acc_start), .first(acc_first), .y_valid, .y_in(y_out),
    .count(acc_count), .rd_en(acc_rd_en), .rd_addr(acc_rd_addr), .rd_data(acc_rd_data)
  );

  sod_controller #(.N_EL(N_EL), .PW(PSUM_W), .W(W), .ACC_D(ACC_D)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd, .busy, .done, .state_o(ctrl_state),
    .w_start, .w_sparse, .w_base, .w_nvec, .w_vec_valid, .w_commit,
    .i_start, .i_sparse, .i_base, .i_nvec,
    .acc_start, .acc_first, .acc_count, .acc_rd_en, .acc_rd_addr, .acc_rd_data,
    .wb_en, .wb_addr, .wb_data
  );

  assert property (@(posedge clk) disable iff (!rst_n) !(wb_en && host_wr_en))
    else $error("sod_top: host write during write-back");
  assert property (@(posedge clk) disable iff (!rst_n) (ctrl_state == C_STREAM) || !i_vec_valid)
    else $error("sod_top: input vector outside STREAM");
  assert property (@(posedge clk) disable iff (!rst_n) (ctrl_state == C_IDLE) |-> !(w_busy || i_busy))
    else $error("sod_top: operand path busy while idle");
endmodule
