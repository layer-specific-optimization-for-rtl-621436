// Dense 1-bit weight computation kernel for one output channel (one PE).
//
// The sliding cube holds TI input channels of a KxK window (KK = K*K activations per
// channel). Each weight is a single bit: 1 stands for +mean and 0 for -mean, so a
// kernel needs no multiplier: the first stage registers +a or -a for every tap, and a
// pipelined adder tree sums the TI*KK terms (the paper's "Ti kernels" of size KxK
// followed by its pipelined adder tree). The result is in units of the binary mean;
// the caller scales it (see conv_core). Latency: 1 + clog2(TI*KK) cycles, one window
// per cycle.
//
// Window and weight layout: index i*KK + (ky*K + kx) for input channel i.
module dense_kernel
  import mp_pkg::*;
#(
  parameter int unsigned TI = 16,
  parameter int unsigned KK = 9,
  localparam int unsigned NT = TI * KK,
  localparam int unsigned OW = QA + 1 + ((NT <= 1) ? 0 : $clog2(NT)),
  localparam int unsigned LAT = 1 + ((NT <= 1) ? 1 : $clog2(NT))
) (
  input  logic                 clk,
  input  logic signed [QA-1:0] act [NT],
  input  logic [NT-1:0]        wbit,
  output logic signed [OW-1:0] sum
);
  logic signed [QA:0] term [NT];

  always_ff @(posedge clk) begin
    for (int i = 0; i < NT; i++) term[i] <= wbit[i] ? (QA+1)'(act[i]) : -(QA+1)'(act[i]);
  end

  adder_tree #(.N(NT), .IW(QA+1), .OW(OW)) u_tree (.clk(clk), .in(term), .sum(sum));
endmodule
