// sod_decomp_unit: decompression unit. Turns one CSC-compressed block in the
// global buffer into a stream of dense vectors for the PE array.
//
// Block layout (this design's choice): the word at base packs the column
// pointers (see sod_pointer_buffer); the words from base+1 on pack the
// non-zero entries {value, index} of all columns in column order, L per word,
// with no gaps between columns.
// Operation, in the steps of the published design:
//  1. start reads the pointer word into the pointer buffer.
//  2. The subtractor gives each column's non-zero count from two neighbouring
//     pointers, while whole words of non-zeros are fetched into the non-zero
//     buffer whenever it has room for one more word.
//  3. The element selector takes from the front of the non-zero buffer the
//     entries still missing for the current column (at most L per cycle).
//  4. The dense mapping unit writes them into the dense format buffer at their
//     indices.
//  5. When the column is complete the dense vector is sent out (vec_valid for
//     one cycle) and the next column starts.
// Interface: rd_en/rd_addr to a global-buffer read port with data one cycle
// later; vec_valid/vec to the PE array, which always accepts. busy is high from
// start until the last vector has left.
// Throughput: one column per cycle while columns hold at most L non-zeros and
// the fetches keep up; empty columns also take one cycle. The first vector
// leaves 5 cycles after start. Non-zero words may be fetched beyond the end of
// the block; the surplus is discarded.
module sod_decomp_unit
  import sod_pkg::*;
#(
  parameter int N_EL  = sod_pkg::N,
  parameter int DW    = sod_pkg::DATA_W,
  parameter int W     = sod_pkg::GB_W,
  parameter int L     = sod_pkg::NZ_L,
  parameter int PTRW  = sod_pkg::PTR_W,
  localparam int DEPTH = 3 * L,
  localparam int QCW   = $clog2(DEPTH + 1),
  localparam int NP    = W / PTRW,
  localparam int COLW  = $clog2(NP)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [ADDR_W-1:0]       base,
  input  logic [CNT_W-1:0]        ncols,
  output logic                    rd_en,
  output logic [ADDR_W-1:0]       rd_addr,
  input  logic [W-1:0]            rd_data,
  output logic                    vec_valid,
  output logic [N_EL-1:0][DW-1:0] vec,
  output logic                    busy
);
  decomp_state_e   state;
  logic [ADDR_W-1:0] addr;
  logic [COLW-1:0] col;
  logic [CNT_W-1:0] last_col;
  logic [PTRW-1:0] taken;
  logic            inflight;

  logic [PTRW-1:0] ptr_lo, ptr_hi, nnz, rem;
  logic [QCW-1:0]  count, k;
  logic [L-1:0]    sel;
  logic            col_done, run, issue_nz;
  nz_entry_t [L-1:0] head, push_data;
  logic [N_EL-1:0][DW-1:0] build, mapped;

  assign run = (state == D_RUN);

  for (genvar e = 0; e < L; e++) begin : g_unpack
    assign push_data[e] = rd_data[e*NZ_W +: NZ_W];
  end

  sod_pointer_buffer #(.W(W), .PTR_W(PTRW)) u_ptr (
    .clk, .rst_n, .load(state == D_PTR), .word(rd_data), .col,
    .ptr_lo, .ptr_hi
  );

  sod_ptr_subtractor #(.PTR_W(PTRW)) u_sub (.ptr_lo, .ptr_hi, .nnz);

  assign rem = nnz - taken;

  sod_nz_buffer #(.L(L), .DEPTH(DEPTH)) u_nzb (
    .clk, .rst_n, .clear(start), .push(run && inflight), .push_data,
    .pop_n(k), .head, .count
  );

  sod_element_select #(.L(L), .RW(PTRW), .CW(QCW)) u_sel (
    .en(run), .rem, .avail(count), .k, .sel, .col_done
  );

  sod_dense_mapping #(.N(N_EL), .L(L), .DW(DW)) u_map (
    .ent(head), .sel, .cur(build), .nxt(mapped)
  );

  sod_dense_format_buffer #(.N(N_EL), .DW(DW)) u_dfb (
    .clk, .rst_n, .clear(start), .upd(run), .col_done, .nxt_vec(mapped),
    .build, .out_valid(vec_valid), .out_vec(vec)
  );

  // fetch a non-zero word whenever one more word is sure to fit
  assign issue_nz = run && (int'(count) + (inflight ? L : 0) + L <= DEPTH);

  always_comb begin
    rd_en   = 1'b0;
    rd_addr = addr;
    if (state == D_IDLE && start) begin
      rd_en   = 1'b1;
      rd_addr = base;
    end else if (issue_nz) begin
      rd_en   = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= D_IDLE;
      addr     <= '0;
      col      <= '0;
      last_col <= '0;
      taken    <= '0;
      inflight <= 1'b0;
    end else begin
      inflight <= issue_nz;
      case (state)
        D_IDLE: if (start) begin
          state    <= D_PTR;
          addr     <= base + 1'b1;
          col      <= '0;
          last_col <= ncols - 1'b1;
          taken    <= '0;
        end
        D_PTR: state <= D_RUN;
        D_RUN: begin
          if (issue_nz) addr <= addr + 1'b1;
          if (col_done) begin
            taken <= '0;
            col   <= col + 1'b1;
            if (CNT_W'(col) == last_col) state <= D_IDLE;
          end else begin
            taken <= taken + PTRW'(k);
          end
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  assign busy = (state != D_IDLE) || vec_valid;

  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == D_IDLE)
    else $error("decomp_unit: start while busy");
  assert property (@(posedge clk) disable iff (!rst_n) start |-> (ncols != 0 && int'(ncols) < NP))
    else $error("decomp_unit: column count out of range");
endmodule
