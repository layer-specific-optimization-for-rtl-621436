// Element-wise addition of a shortcut: adds two vectors of L signed 8-bit
// activations lane by lane and saturates each sum to 8 bits. Purely combinational;
// the caller registers the result. This is the "element-wise addition" that closes a
// residual block; saturation is this design's choice.
module eltwise_add
  import mp_pkg::*;
#(
  parameter int unsigned L = 16
) (
  input  logic [L*QA-1:0] a,
  input  logic [L*QA-1:0] b,
  output logic [L*QA-1:0] y
);
  always_comb begin
    for (int i = 0; i < L; i++)
      y[i*QA +: QA] = sat_act(64'($signed(a[i*QA +: QA])) + 64'($signed(b[i*QA +: QA])));
  end
endmodule
