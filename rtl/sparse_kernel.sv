// Sparse 8-bit weight computation kernel, shared by the TO output channels of a
// K x K x TI x TO weight block.
//
// Up to NM sparse weights of the current block are held as entries {output channel,
// input channel, <x,y> position, 8-bit value}; cnt says how many are valid. Stage 1
// ("decode input block" and "array of multipliers") selects, for each entry, the
// activation at its (input channel, position) in the sliding cube and multiplies.
// Stage 2 ("decode output channels") routes every product to the adder tree of its
// output channel: the products of one channel are packed, in entry order, into the
// TS (tree_size) inputs of that channel's tree. Stage 3 on are the TO pipelined adder
// trees. When cnt is 0 or en is low the multiplier inputs are held at zero (kernel off).
// Latency: 2 + clog2(TS) cycles, one window per cycle. The packing by rank inside a
// channel is this design's way of implementing the paper's output channel decoder.
// An assertion flags a block with more than TS weights for one output channel, which
// the offline weight preparation must rule out.
module sparse_kernel
  import mp_pkg::*;
#(
  parameter int unsigned TI = 16,
  parameter int unsigned TO = 16,
  parameter int unsigned KK = 9,
  parameter int unsigned NM = 27,   // N_multipliers
  parameter int unsigned TS = 8,    // tree_size
  localparam int unsigned OCW = idx_w(TO),
  localparam int unsigned ICW = idx_w(TI),
  localparam int unsigned XYW = idx_w(KK),
  localparam int unsigned PW_ = QA + QW,                           // product width
  localparam int unsigned OW = PW_ + ((TS <= 1) ? 0 : $clog2(TS)),
  localparam int unsigned LAT = 2 + ((TS <= 1) ? 1 : $clog2(TS))
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic signed [QA-1:0] act [TI*KK],
  input  logic [CNT_W-1:0]     cnt,
  input  logic [OCW-1:0]       e_oc [NM],
  input  logic [ICW-1:0]       e_ic [NM],
  input  logic [XYW-1:0]       e_xy [NM],
  input  logic signed [QW-1:0] e_w  [NM],
  output logic signed [OW-1:0] psum [TO]
);
  localparam int unsigned RW = idx_w(NM + 1);

  // Stage 1: operand selection and multiplication.
  logic signed [PW_-1:0] prod  [NM];
  logic [OCW-1:0]        oc_r  [NM];
  logic                  val_r [NM];
  always_ff @(posedge clk) begin
    for (int m = 0; m < NM; m++) begin
      logic on;
      on = en && (CNT_W'(m) < cnt);
      oc_r[m]  <= e_oc[m];
      prod[m]  <= on ? PW_'(act[int'(e_ic[m]) * KK + int'(e_xy[m])] * e_w[m]) : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < NM; m++) val_r[m] <= 1'b0;
    end else begin
      for (int m = 0; m < NM; m++) val_r[m] <= en && (CNT_W'(m) < cnt);
    end
  end

  // Stage 2: output channel decoder.
  logic [RW-1:0] rank [NM];
  always_comb begin
    for (int m = 0; m < NM; m++) begin
      rank[m] = '0;
      for (int j = 0; j < m; j++)
        if (val_r[j] && oc_r[j] == oc_r[m]) rank[m] = rank[m] + 1'b1;
    end
  end

  logic signed [PW_-1:0] slot [TO][TS];
  always_ff @(posedge clk) begin
    for (int o = 0; o < TO; o++) begin
      for (int s = 0; s < TS; s++) begin
        logic signed [PW_-1:0] v;
        v = '0;
        for (int m = 0; m < NM; m++)
          if (val_r[m] && int'(oc_r[m]) == o && int'(rank[m]) == s) v = prod[m];
        slot[o][s] <= v;
      end
    end
  end

  // Stage 3..: one pipelined adder tree per output channel.
  for (genvar o = 0; o < TO; o++) begin : g_tree
    adder_tree #(.N(TS), .IW(PW_), .OW(OW)) u_tree (.clk(clk), .in(slot[o]), .sum(psum[o]));
  end

// No output channel may receive more products than its adder tree has inputs.
  for (genvar m = 0; m < NM; m++) begin : g_chk
    a_tree_size: assert property (@(posedge clk) disable iff (!rst_n)
      !(val_r[m] && int'(rank[m]) >= TS))
      else $error("sparse_kernel: more than tree_size=%0d weights for one output channel", TS);
  end
endmodule
