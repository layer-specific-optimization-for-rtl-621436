// Fixed-latency delay line: W-bit value delayed by D clock cycles (D = 0 is a wire).
// Used for the "delayed registers" that line up the dense and sparse kernels and to
// carry control tags alongside the convolution pipeline. Registers reset to zero.
module delay_line #(
  parameter int unsigned W = 1,
  parameter int unsigned D = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (D == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] r [D];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < D; i++) r[i] <= '0;
      end else begin
        r[0] <= d;
        for (int i = 1; i < D; i++) r[i] <= r[i-1];
      end
    end
    assign q = r[D-1];
  end
endmodule
