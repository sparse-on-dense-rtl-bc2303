// sod_nz_buffer: non-zero index/value buffer of the decompression unit.
//
// A queue of (index, value) entries. A push appends one whole global-buffer
// word of L entries; pop_n entries (0..count) leave from the front in the same
// cycle, so one word may serve several columns and one column may span several
// words. head shows the first L entries to the element selector. The caller
// must only push when count - pop_n + L <= DEPTH. clear empties the queue.
// Timing: count/head reflect a push or pop from the next cycle on.
// The buffer being filled a word at a time with entries of mixed columns
// follows the published design; the queue form and its depth are this
// design's choices.
module sod_nz_buffer
#(
  parameter int L     = sod_pkg::NZ_L,
  parameter int DEPTH = 3 * L,
  localparam int CW   = $clog2(DEPTH + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  push,
  input  sod_pkg::nz_entry_t [L-1:0]     push_data,
  input  logic [CW-1:0]         pop_n,
  output sod_pkg::nz_entry_t [L-1:0]     head,
  output logic [CW-1:0]         count
);
  sod_pkg::nz_entry_t       q   [DEPTH];
  sod_pkg::nz_entry_t       nxt [DEPTH];
  logic [CW-1:0]   kept;

  assign kept = count - pop_n;

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      nxt[i] = (i + int'(pop_n) < DEPTH) ? q[i + int'(pop_n)] : '0;
      if (push && i >= int'(kept) && i < int'(kept) + L)
        nxt[i] = push_data[i - int'(kept)];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
    end else if (clear) begin
      count <= '0;
    end else begin
      count <= kept + (push ? CW'(L) : '0);
      for (int i = 0; i < DEPTH; i++) q[i] <= nxt[i];
    end
  end

  for (genvar e = 0; e < L; e++) begin : g_head
    assign head[e] = q[e];
  end

  assert property (@(posedge clk) disable iff (!rst_n || clear) pop_n <= count)
    else $error("nz_buffer: pop beyond count");
  assert property (@(posedge clk) disable iff (!rst_n || clear) push |-> int'(kept) + L <= DEPTH)
    else $error("nz_buffer: overflow");
endmodule
