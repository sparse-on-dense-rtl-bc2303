// sod_pe_array: TPU-style weight-stationary systolic array of N_ROWS x N_COLS
// sod_pe cells, with the skew and de-skew registers around it.
//
// Weights: a dense weight vector (element c for column c) is shifted into the
// top row on each w_shift; after N_ROWS shifts the vector shifted first sits in
// the bottom row. w_commit makes the shifted weights active everywhere.
// Inputs: x_in[r] is the input for row r. Row r is delayed r cycles (skew) so
// that the diagonal wavefront meets the psums moving down; psums enter the top
// at zero, and column c's result is delayed N_COLS-1-c cycles (de-skew) so a
// whole output vector leaves together.
// Timing: y_out / y_valid appear LAT = N_ROWS + N_COLS - 1 cycles after the
// matching x_in / x_valid; a new vector may enter every cycle. Empty cycles
// (x_valid = 0) flow through as bubbles: the array never stalls.
// y_out[c] = sum over r of x_in[r] * W[r][c], W[r][c] the active weight of PE (r,c).
// The array and its dataflow follow the published design; skew/de-skew,
// bubbles and the valid pipeline are this design's choices.
module sod_pe_array #(
  parameter int N_ROWS = sod_pkg::N,
  parameter int N_COLS = sod_pkg::N,
  parameter int DW     = sod_pkg::DATA_W,
  parameter int PW     = sod_pkg::PSUM_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          w_shift,
  input  logic                          w_commit,
  input  logic [N_COLS-1:0][DW-1:0]     w_in,
  input  logic                          x_valid,
  input  logic [N_ROWS-1:0][DW-1:0]     x_in,
  output logic                          y_valid,
  output logic [N_COLS-1:0][PW-1:0]     y_out
);
  localparam int LAT = N_ROWS + N_COLS - 1;

  logic signed [DW-1:0] xh [N_ROWS][N_COLS+1];  // horizontal input wires
  logic signed [PW-1:0] pv [N_ROWS+1][N_COLS];  // vertical psum wires
  logic signed [DW-1:0] wv [N_ROWS+1][N_COLS];  // vertical weight chain

  // input skew: row r delayed by r cycles
  for (genvar r = 0; r < N_ROWS; r++) begin : g_skew
    if (r == 0) begin : g_direct
      assign xh[r][0] = x_in[r];
    end else begin : g_delay
      logic [DW-1:0] sk [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) sk[i] <= '0;
        end else begin
          sk[0] <= x_in[r];
          for (int i = 1; i < r; i++) sk[i] <= sk[i-1];
        end
      end
      assign xh[r][0] = sk[r-1];
    end
  end

  for (genvar c = 0; c < N_COLS; c++) begin : g_top
    assign pv[0][c] = '0;
    assign wv[0][c] = w_in[c];
  end

  for (genvar r = 0; r < N_ROWS; r++) begin : g_row
    for (genvar c = 0; c < N_COLS; c++) begin : g_col
      sod_pe #(.DW(DW), .PW(PW)) u_pe (
        .clk, .rst_n, .w_shift, .w_commit,
        .w_in(wv[r][c]), .w_out(wv[r+1][c]),
        .x_in(xh[r][c]), .x_out(xh[r][c+1]),
        .psum_in(pv[r][c]), .psum_out(pv[r+1][c])
      );
    end
  end

  // output de-skew: column c delayed by N_COLS-1-c cycles
  for (genvar c = 0; c < N_COLS; c++) begin : g_deskew
    localparam int D = N_COLS - 1 - c;
    if (D == 0) begin : g_direct
      assign y_out[c] = pv[N_ROWS][c];
    end else begin : g_delay
      logic [PW-1:0] ds [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < D; i++) ds[i] <= '0;
        end else begin
          ds[0] <= pv[N_ROWS][c];
          for (int i = 1; i < D; i++) ds[i] <= ds[i-1];
        end
      end
      assign y_out[c] = ds[D-1];
    end
  end

  // valid travels alongside the wavefront
  logic [LAT-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], x_valid};
  end
  assign y_valid = vpipe[LAT-1];

  // weights must not change under data in flight
  assert property (@(posedge clk) disable iff (!rst_n) w_commit |-> (vpipe == '0 && !x_valid))
    else $error("w_commit while data is in the array");
endmodule
