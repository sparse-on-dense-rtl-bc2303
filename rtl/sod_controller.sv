// sod_controller: sequencer of one accelerator pass.
//
// A pass multiplies one N x N weight tile by n_vec input vectors:
//   LOAD_W : the weight operand path delivers N dense weight vectors, each
//            shifted into the PE array (the top wires w_shift to its valid);
//   COMMIT : the shifted weights become active; the input operand path and
//            the accumulator are started;
//   STREAM : input vectors flow through the array, bubbles where the
//            decompression unit has nothing ready; the state ends when the
//            accumulator has received n_vec output vectors;
//   WB_RD/WB_WR (if wb_en): each accumulator row is read and written to the
//            global buffer as WPR = N*PW/W consecutive words from out_base;
//   DONE   : done is high for one cycle.
// acc_first = 1 starts a new result, 0 adds this tile's products to it, so a
// product over K = k*N is k passes. The published design gives the dataflow
// but no controller: this sequencer, its command format and the serial
// (non-overlapped) passes are this design's choices. The weight path is
// started in the cycle the command is accepted, so w_sparse and w_base come
// straight from the command and w_nvec is the constant N.
module sod_controller
  import sod_pkg::*;
#(
  parameter int N_EL  = sod_pkg::N,
  parameter int PW    = sod_pkg::PSUM_W,
  parameter int W     = sod_pkg::GB_W,
  parameter int ACC_D = sod_pkg::ACC_DEPTH,
  localparam int WPR  = (N_EL * PW) / W,
  localparam int AW   = $clog2(ACC_D),
  localparam int ACW  = $clog2(ACC_D + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cmd_valid,
  input  sod_cmd_t                  cmd,
  output logic                      busy,
  output logic                      done,
  output ctrl_state_e               state_o,
  // weight operand path
  output logic                      w_start,
  output logic                      w_sparse,
  output logic [ADDR_W-1:0]         w_base,
  output logic [CNT_W-1:0]          w_nvec,
  input  logic                      w_vec_valid,
  output logic                      w_commit,
  // input operand path
  output logic                      i_start,
  output logic                      i_sparse,
  output logic [ADDR_W-1:0]         i_base,
  output logic [CNT_W-1:0]          i_nvec,
  // accumulator
  output logic                      acc_start,
  output logic                      acc_first,
  input  logic [ACW-1:0]            acc_count,
  output logic                      acc_rd_en,
  output logic [AW-1:0]             acc_rd_addr,
  input  logic [N_EL-1:0][PW-1:0]   acc_rd_data,
  // write-back to the global buffer
  output logic                      wb_en,
  output logic [ADDR_W-1:0]         wb_addr,
  output logic [W-1:0]              wb_data
);
  ctrl_state_e       state;
  sod_cmd_t          c;
  logic [CNT_W-1:0]  wcnt;
  logic [AW-1:0]     row;
  logic [$clog2(WPR+1)-1:0] half;
  logic [N_EL*PW-1:0] flat;

  assign state_o = state;
  assign busy    = (state != C_IDLE);
  assign done    = (state == C_DONE);

  assign w_start  = (state == C_IDLE) && cmd_valid;
  assign w_sparse = cmd.w_sparse;
  assign w_base   = cmd.w_base;
  assign w_nvec   = CNT_W'(N_EL);
  assign w_commit = (state == C_COMMIT);

  assign i_start  = (state == C_COMMIT);
  assign i_sparse = c.i_sparse;
  assign i_base   = c.i_base;
  assign i_nvec   = c.n_vec;

  assign acc_start   = (state == C_COMMIT);
  assign acc_first   = c.acc_first;
  assign acc_rd_en   = (state == C_WB_RD);
  assign acc_rd_addr = row;

  assign flat    = acc_rd_data;
  assign wb_en   = (state == C_WB_WR);
  assign wb_addr = c.out_base + ADDR_W'(int'(row) * WPR + int'(half));
  assign wb_data = flat[int'(half)*W +: W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      c     <= '0;
      wcnt  <= '0;
      row   <= '0;
      half  <= '0;
    end else begin
      case (state)
        C_IDLE: if (cmd_valid) begin
          c     <= cmd;
          wcnt  <= '0;
          state <= C_LOAD_W;
        end
        C_LOAD_W: if (w_vec_valid) begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == CNT_W'(N_EL - 1)) state <= C_COMMIT;
        end
        C_COMMIT: state <= C_STREAM;
        C_STREAM: if (acc_count == ACW'(c.n_vec)) begin
          row   <= '0;
          half  <= '0;
          state <= c.wb_en ? C_WB_RD : C_DONE;
        end
        C_WB_RD: state <= C_WB_WR;
        C_WB_WR: begin
          if (int'(half) == WPR - 1) begin
            half <= '0;
            row  <= row + 1'b1;
            state <= (CNT_W'(row) == c.n_vec - 1'b1) ? C_DONE : C_WB_RD;
          end else begin
            half <= half + 1'b1;
          end
        end
        C_DONE:  state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (cmd_valid && state == C_IDLE) |-> (cmd.n_vec != 0 && int'(cmd.n_vec) <= ACC_D))
    else $error("controller: n_vec out of range");
  assert property (@(posedge clk) disable iff (!rst_n) (state != C_LOAD_W) |-> !w_vec_valid)
    else $error("controller: weight vector outside LOAD_W");
endmodule
