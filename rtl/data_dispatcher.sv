// Data dispatcher: forms the K x K x TI sliding cube for the processing elements.
//
// For an output position (y, x) and an input-channel tile it computes the K*K read
// addresses of the window's pixels in the activation buffer, drives them to the
// buffer's K*K read ports, and one cycle later (the buffer's read latency) assembles
// the returned words into the window, replacing every tap that lies outside the
// feature map by zero ("same" zero padding, P = (K-1)/2). In 1x1 mode (k1) only the
// centre tap is kept, so a 3x3 datapath can run 1x1 layers.
//
// Buffer layout, one word per (channel tile, row, column):
//   ROWS = 0  (frame buffer, main layer): addr = (tile*h + y')*h + x'
//   ROWS > 0  (row buffer of a pipelined layer, a ring of ROWS rows):
//             addr = (tile*ROWS + slot(y'))*h + x', slot(y') = (slot_y + y' - y) mod ROWS
// where slot_y is the ring slot holding row y. h is the feature-map height/width.
// Window layout: lane i*KK + (ky*K + kx) for input channel i of the tile.
module data_dispatcher
  import mp_pkg::*;
#(
  parameter int unsigned TI    = 16,
  parameter int unsigned K     = 3,
  parameter int unsigned ROWS  = 0,
  parameter int unsigned DEPTH = 10816,
  localparam int unsigned KK   = K * K,
  localparam int unsigned AW   = idx_w(DEPTH)
) (
  input  logic                 clk,
  input  logic                 valid,
  input  logic [15:0]          y,
  input  logic [15:0]          x,
  input  logic [15:0]          tile,
  input  logic [15:0]          slot_y,
  input  logic [15:0]          h,
  input  logic                 k1,
  output logic [AW-1:0]        raddr [KK],
  input  logic [TI*QA-1:0]     rdata [KK],
  output logic signed [QA-1:0] win   [TI*KK]
);
  localparam int P = (int'(K) - 1) / 2;

  logic [KK-1:0] in_map, in_map_r;

  always_comb begin
    for (int ky = 0; ky < int'(K); ky++) begin
      for (int kx = 0; kx < int'(K); kx++) begin
        int yy, xx, row, t;
        yy = int'(y) + ky - P;
        xx = int'(x) + kx - P;
        in_map[ky*K+kx] = valid && yy >= 0 && yy < int'(h) && xx >= 0 && xx < int'(h)
                          && (!k1 || (ky == P && kx == P));
        if (ROWS == 0) begin
          row = yy;
          t   = int'(tile) * int'(h);
        end else begin
          row = (int'(slot_y) + ky - P + int'(ROWS)) % int'(ROWS);
          t   = int'(tile) * int'(ROWS);
        end
        raddr[ky*K+kx] = in_map[ky*K+kx] ? AW'((t + row) * int'(h) + xx) : '0;
      end
    end
  end

  always_ff @(posedge clk) in_map_r <= in_map;

  always_comb begin
    for (int i = 0; i < int'(TI); i++)
      for (int k = 0; k < int'(KK); k++)
        win[i*KK + k] = in_map_r[k] ? $signed(rdata[k][i*QA +: QA]) : '0;
  end
endmodule
