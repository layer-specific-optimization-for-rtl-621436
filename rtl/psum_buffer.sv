// Output (partial-sum) buffer with its accumulate loop.
//
// Holds TO partial sums per output position. For each incoming vector at position
// addr: if first is set the vector is stored as is (first input-channel tile),
// otherwise it is added to what the buffer holds. If last is set (last input-channel
// tile) the accumulated vector is also presented at the output one cycle later for
// batch normalisation. DEPTH is H for a pipelined layer (Scheme 3: one output row)
// and H*H for the main layer (Scheme 2: one whole output plane per channel). The
// read-modify-write takes one cycle, so the same address may come back after one
// cycle at the earliest; both data flows revisit an address only after a full row.
// A tag travels with the data (used for the channel tile and the write address).
module psum_buffer
  import mp_pkg::*;
#(
  parameter int unsigned TO    = 16,
  parameter int unsigned IW    = 24,
  parameter int unsigned DEPTH = 676,
  parameter int unsigned TAGW  = 8,
  localparam int unsigned AW   = idx_w(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [AW-1:0]        addr,
  input  logic                 first,
  input  logic                 last,
  input  logic [TAGW-1:0]      tag_in,
  input  logic signed [IW-1:0] psum [TO],
  output logic                 out_valid,
  output logic [TAGW-1:0]      tag_out,
  output logic signed [QS-1:0] acc  [TO]
);
  logic [TO*QS-1:0]     mem [DEPTH];
  logic [TO*QS-1:0]     old, nxt;

  assign old = mem[addr];
  always_comb begin
    for (int o = 0; o < TO; o++)
      nxt[o*QS +: QS] = first ? QS'(psum[o]) : $signed(old[o*QS +: QS]) + QS'(psum[o]);
  end

  always_ff @(posedge clk) begin
    if (in_valid) mem[addr] <= nxt;
    for (int o = 0; o < TO; o++) acc[o] <= $signed(nxt[o*QS +: QS]);
    tag_out <= tag_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && last;
  end
endmodule
