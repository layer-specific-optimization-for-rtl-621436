// Batch normalisation and quantisation of TO accumulated outputs.
//
// Per channel, in the order the paper draws it: multiply by a signed scale, shift
// right arithmetically, add a signed bias, and quantise by saturating to a signed
// 8-bit activation. Two pipeline stages (product; shift-add-saturate), so the output
// follows the input by 2 cycles and a new vector is accepted every cycle. Scale and
// bias widths and the round-towards-minus-infinity shift are this design's choices.
module batch_norm
  import mp_pkg::*;
#(
  parameter int unsigned TO = 16,
  parameter int unsigned IW = QS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IW-1:0]    acc   [TO],
  input  logic signed [BN_SW-1:0] scale [TO],
  input  logic signed [BN_BW-1:0] bias  [TO],
  input  logic [5:0]              shift,
  output logic                    out_valid,
  output logic signed [QA-1:0]    q     [TO]
);
  localparam int unsigned MW = IW + BN_SW;

  logic signed [MW-1:0]    prod   [TO];
  logic signed [BN_BW-1:0] bias_r [TO];
  logic [5:0]              shift_r;
  logic                    v1;

  always_ff @(posedge clk) begin
    for (int o = 0; o < TO; o++) begin
      prod[o]   <= MW'(acc[o]) * MW'(scale[o]);
      bias_r[o] <= bias[o];
    end
    shift_r <= shift;
  end

  always_ff @(posedge clk) begin
    for (int o = 0; o < TO; o++) begin
      logic signed [63:0] t;
      t    = 64'(prod[o] >>> shift_r) + 64'(bias_r[o]);
      q[o] <= sat_act(t);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end
endmodule
