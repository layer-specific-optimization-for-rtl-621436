// On-chip activation buffer (BRAM model) with one write port and NR read ports.
//
// Each word holds the activations of one pixel for one tile of channels (Ti lanes of
// 8 bits). A pipelined layer uses it as its row buffer of K+1 rows, the main layer as
// its input/output frame buffers and its shortcut frame buffer. NR = K*K read ports
// let the data dispatcher fetch a whole KxK window of one channel tile per cycle;
// reads are registered (1-cycle latency), as in a block RAM. A real FPGA build
// would bank the memory to give these ports; the multi-ported array is this design's
// simplification. Read-during-write to the same address returns the old word.
module frame_buffer #(
  parameter int unsigned WW    = 128,
  parameter int unsigned DEPTH = 10816,
  parameter int unsigned NR    = 9,
  localparam int unsigned AW   = (DEPTH <= 1) ? 1 : $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [WW-1:0] wdata,
  input  logic [AW-1:0] raddr [NR],
  output logic [WW-1:0] rdata [NR]
);
  logic [WW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int r = 0; r < NR; r++) rdata[r] <= mem[raddr[r]];
  end
endmodule
