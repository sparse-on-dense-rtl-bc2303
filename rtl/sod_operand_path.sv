// sod_operand_path: one operand feed of the PE array (weights or inputs).
//
// Per pass the operand is either compressed (sparse = 1): a CSC block read and
// expanded by a sod_decomp_unit, or dense (sparse = 0): nvec consecutive
// global-buffer words, each already one dense vector, read one per cycle and
// sent straight on, bypassing the decompression unit. Two multiplexers pick
// the active side: one for the global-buffer read port, one for the vector
// going to the PE array. The bypass and the per-operand choice of format
// follow the published design (sparse weight with sparse or dense input, and
// dense/dense); allowing dense weights with sparse inputs too is this
// design's choice.
// Interface: start with sparse/base/nvec; rd_en/rd_addr to a global-buffer
// read port whose data arrives one cycle later; vec_valid/vec one dense
// vector per valid cycle (always accepted); busy until the last vector left.
// Dense timing: first vector two cycles after start, then one per cycle.
module sod_operand_path
  import sod_pkg::*;
#(
  parameter int N_EL = sod_pkg::N,
  parameter int DW   = sod_pkg::DATA_W,
  parameter int W    = sod_pkg::GB_W,
  parameter int L    = sod_pkg::NZ_L
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    sparse,
  input  logic [ADDR_W-1:0]       base,
  input  logic [CNT_W-1:0]        nvec,
  output logic                    rd_en,
  output logic [ADDR_W-1:0]       rd_addr,
  input  logic [W-1:0]            rd_data,
  output logic                    vec_valid,
  output logic [N_EL-1:0][DW-1:0] vec,
  output logic                    busy
);
  logic                    mode_sparse, sel_sparse;
  logic                    dc_rd_en, dc_valid, dc_busy;
  logic [ADDR_W-1:0]       dc_rd_addr;
  logic [N_EL-1:0][DW-1:0] dc_vec, dn_vec;

  // dense bypass reader
  logic              dn_active, dn_pend;
  logic [ADDR_W-1:0] dn_addr;
  logic [CNT_W-1:0]  dn_left;

  sod_decomp_unit #(.N_EL(N_EL), .DW(DW), .W(W), .L(L)) u_decomp (
    .clk, .rst_n, .start(start && sparse), .base, .ncols(nvec),
    .rd_en(dc_rd_en), .rd_addr(dc_rd_addr), .rd_data,
    .vec_valid(dc_valid), .vec(dc_vec), .busy(dc_busy)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_sparse <= 1'b0;
      dn_active   <= 1'b0;
      dn_pend     <= 1'b0;
      dn_addr     <= '0;
      dn_left     <= '0;
    end else begin
      dn_pend <= dn_active;
      if (start) begin
        mode_sparse <= sparse;
        if (!sparse) begin
          dn_active <= (nvec != 0);
          dn_addr   <= base;
          dn_left   <= nvec;
        end
      end else if (dn_active) begin
        dn_addr <= dn_addr + 1'b1;
        dn_left <= dn_left - 1'b1;
        if (dn_left == 1) dn_active <= 1'b0;
      end
    end
  end

  assign dn_vec = rd_data;

  // global-buffer side multiplexer
  assign sel_sparse = start ? sparse : mode_sparse;
  assign rd_en      = sel_sparse ? dc_rd_en   : dn_active;
  assign rd_addr    = sel_sparse ? dc_rd_addr : dn_addr;

  // PE-array side multiplexer (decompressed or bypassed)
  assign vec_valid  = mode_sparse ? dc_valid : dn_pend;
  assign vec        = mode_sparse ? dc_vec   : dn_vec;
  assign busy       = dc_busy || dn_active || dn_pend;

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("operand_path: start while busy");
endmodule
