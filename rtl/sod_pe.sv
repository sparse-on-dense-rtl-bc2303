// sod_pe: one processing element of the weight-stationary systolic array.
//
// Each cycle the PE multiplies the input arriving from the left by its active
// weight, adds the partial sum arriving from above, and registers both the sum
// (passed down) and the input (passed right). This MAC-plus-registers cell is
// the dense PE of the published design. The weight is double-buffered, which
// is this design's choice: a shadow register forms a column-wide shift chain
// (w_shift moves weights one PE down, w_in from above, w_out to below) and
// w_commit copies shadow to active in one cycle, so new weights can be shifted
// in without touching data already in the array.
// Timing: x_out and psum_out are valid one cycle after x_in / psum_in.
// Arithmetic is signed two's complement; the psum wraps at PW bits.
module sod_pe #(
  parameter int DW = sod_pkg::DATA_W,
  parameter int PW = sod_pkg::PSUM_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 w_shift,
  input  logic                 w_commit,
  input  logic signed [DW-1:0] w_in,
  output logic signed [DW-1:0] w_out,
  input  logic signed [DW-1:0] x_in,
  output logic signed [DW-1:0] x_out,
  input  logic signed [PW-1:0] psum_in,
  output logic signed [PW-1:0] psum_out
);
  logic signed [DW-1:0]   w_shadow, w_act;
  logic signed [2*DW-1:0] prod;

  assign prod  = x_in * w_act;
  assign w_out = w_shadow;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_shadow <= '0;
      w_act    <= '0;
      x_out    <= '0;
      psum_out <= '0;
    end else begin
      if (w_shift)  w_shadow <= w_in;
      if (w_commit) w_act    <= w_shadow;
      x_out    <= x_in;
      psum_out <= psum_in + PW'(prod);
    end
  end
endmodule
