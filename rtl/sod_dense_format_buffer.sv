// sod_dense_format_buffer: dense format buffer of the decompression unit.
//
// Holds the dense vector of the column being decompressed (build) and the
// last completed vector (out_vec). On upd the vector from the dense mapping
// unit is taken: if col_done it becomes out_vec, out_valid is raised for one
// cycle and build restarts from all zeros; otherwise it is kept in build while
// more entries of the column arrive. clear zeroes build.
// Timing: out_valid/out_vec are registered, one cycle after the completing upd.
// The buffer between dense mapping and PE array follows the published design;
// the one-cycle output pulse (the PE array always accepts) is this design's
// choice.
module sod_dense_format_buffer #(
  parameter int N  = sod_pkg::N,
  parameter int DW = sod_pkg::DATA_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 upd,
  input  logic                 col_done,
  input  logic [N-1:0][DW-1:0] nxt_vec,
  output logic [N-1:0][DW-1:0] build,
  output logic                 out_valid,
  output logic [N-1:0][DW-1:0] out_vec
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      build     <= '0;
      out_vec   <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        build <= '0;
      end else if (upd) begin
        if (col_done) begin
          out_vec   <= nxt_vec;
          out_valid <= 1'b1;
          build     <= '0;
        end else begin
          build     <= nxt_vec;
        end
      end
    end
  end
endmodule
