// Pipelined adder tree: sums N signed IW-bit inputs.
//
// The inputs are padded with zeros to the next power of two and added pairwise, one
// tree level per clock cycle, so a new set of inputs is accepted every cycle and the
// sum appears LAT = max(1, clog2(N)) cycles later. The output is wide enough never
// to overflow (IW + clog2(N) bits). The paper uses such trees after the dense 1-bit
// kernels and after the sparse multipliers; one register per level is this design's
// choice of pipelining.
module adder_tree #(
  parameter int unsigned N  = 8,
  parameter int unsigned IW = 8,
  parameter int unsigned OW = IW + ((N <= 1) ? 0 : $clog2(N))
) (
  input  logic                 clk,
  input  logic signed [IW-1:0] in  [N],
  output logic signed [OW-1:0] sum
);
  localparam int unsigned L = (N <= 1) ? 0 : $clog2(N);
  localparam int unsigned P = 1 << L;

  if (L == 0) begin : g_single
    always_ff @(posedge clk) sum <= OW'(in[0]);
  end else begin : g_tree
    logic signed [OW-1:0] lvl0 [P];
    always_comb begin
      for (int i = 0; i < P; i++) lvl0[i] = (i < N) ? OW'(in[i]) : '0;
    end
    for (genvar l = 1; l <= L; l++) begin : g_lvl
      logic signed [OW-1:0] v [P >> l];
      if (l == 1) begin : g_first
        always_ff @(posedge clk) begin
          for (int i = 0; i < (P >> l); i++) v[i] <= lvl0[2*i] + lvl0[2*i+1];
        end
      end else begin : g_next
        always_ff @(posedge clk) begin
          for (int i = 0; i < (P >> l); i++) v[i] <= g_lvl[l-1].v[2*i] + g_lvl[l-1].v[2*i+1];
        end
      end
    end
    assign sum = g_lvl[L].v[0];
  end
endmodule
