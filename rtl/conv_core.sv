// Mixed-precision convolution datapath (the processing elements of one layer).
//
// Every cycle one K x K x TI sliding cube enters and is used twice in parallel:
//  * TO dense PEs (dense_kernel), one per output channel, apply the 1-bit weights of
//    the current K x K x TI x TO block without multipliers;
//  * one sparse kernel (sparse_kernel) applies the block's few 8-bit weights with
//    NM multipliers and TO adder trees of TS inputs.
// Delay registers line the shorter of the two pipelines up with the longer one; then
// each channel's dense sum, scaled by the binary mean (a left shift by mean_shift:
// the mean is taken as a power of two in units of the 8-bit weights, this design's
// choice), is added to its sparse sum. The result is accumulated over input-channel
// tiles in the output (partial-sum) buffer; at the last tile it goes through batch
// normalisation and quantisation.
//
// Timing: fully pipelined, one window per cycle. A window entering at cycle c reaches
// the partial-sum buffer at c+LM+1 and, if last, leaves quantised at c+LAT
// (LAT = LM + 4, LM = the longer of the dense and sparse latencies). bn_tag shows the
// tag of the vector about to enter batch norm: the caller must answer with that
// channel tile's scale and bias in the same cycle. tag_in travels unchanged to
// out_tag. Weights, cnt and mean_shift must be valid in the cycle the window enters.
module conv_core
  import mp_pkg::*;
#(
  parameter int unsigned TI     = 16,
  parameter int unsigned TO     = 16,
  parameter int unsigned K      = 3,
  parameter int unsigned NM     = 27,
  parameter int unsigned TS     = 8,
  parameter int unsigned PDEPTH = 676,
  parameter int unsigned TAGW   = 16,
  localparam int unsigned KK    = K * K,
  localparam int unsigned NTAP  = TI * KK,
  localparam int unsigned OCW   = idx_w(TO),
  localparam int unsigned ICW   = idx_w(TI),
  localparam int unsigned XYW   = idx_w(KK),
  localparam int unsigned PAW   = idx_w(PDEPTH),
  localparam int unsigned DOW   = QA + 1 + ((NTAP <= 1) ? 0 : $clog2(NTAP)),
  localparam int unsigned SOW   = QA + QW + ((TS <= 1) ? 0 : $clog2(TS)),
  localparam int unsigned LD    = 1 + ((NTAP <= 1) ? 1 : $clog2(NTAP)),
  localparam int unsigned LS    = 2 + ((TS <= 1) ? 1 : $clog2(TS)),
  localparam int unsigned LM    = (LD > LS) ? LD : LS,
  localparam int unsigned LAT   = LM + 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // window and its control
  input  logic                    in_valid,
  input  logic signed [QA-1:0]    win [NTAP],
  input  logic [PAW-1:0]          paddr,
  input  logic                    first,
  input  logic                    last,
  input  logic [TAGW-1:0]         tag_in,
  // current weight block
  input  logic [TO*NTAP-1:0]      dense,
  input  logic [CNT_W-1:0]        cnt,
  input  logic [OCW-1:0]          e_oc [NM],
  input  logic [ICW-1:0]          e_ic [NM],
  input  logic [XYW-1:0]          e_xy [NM],
  input  logic signed [QW-1:0]    e_w  [NM],
  input  logic [3:0]              mean_shift,
  // batch norm parameters, looked up by the caller from bn_tag
  output logic [TAGW-1:0]         bn_tag,
  input  logic signed [BN_SW-1:0] bn_scale [TO],
  input  logic signed [BN_BW-1:0] bn_bias  [TO],
  input  logic [5:0]              bn_shift,
  // quantised output
  output logic                    out_valid,
  output logic signed [QA-1:0]    out_q [TO],
  output logic [TAGW-1:0]         out_tag
);
  // ---- dense PEs ----
  logic signed [DOW-1:0] dsum   [TO];
  logic signed [DOW-1:0] dsum_d [TO];
  for (genvar o = 0; o < TO; o++) begin : g_pe
    dense_kernel #(.TI(TI), .KK(KK)) u_dense (
      .clk(clk), .act(win), .wbit(dense[o*NTAP +: NTAP]), .sum(dsum[o]));
    delay_line #(.W(DOW), .D(LM - LD)) u_dal (
      .clk(clk), .rst_n(rst_n), .d(dsum[o]), .q(dsum_d[o]));
  end

  // ---- sparse kernel ----
  logic signed [SOW-1:0] ssum   [TO];
  logic signed [SOW-1:0] ssum_d [TO];
  sparse_kernel #(.TI(TI), .TO(TO), .KK(KK), .NM(NM), .TS(TS)) u_sparse (
    .clk(clk), .rst_n(rst_n), .en(in_valid && cnt != '0), .act(win), .cnt(cnt),
    .e_oc(e_oc), .e_ic(e_ic), .e_xy(e_xy), .e_w(e_w), .psum(ssum));
  for (genvar o = 0; o < TO; o++) begin : g_sal
    delay_line #(.W(SOW), .D(LM - LS)) u_sal (
      .clk(clk), .rst_n(rst_n), .d(ssum[o]), .q(ssum_d[o]));
  end

  // ---- control travelling with the window up to the add stage ----
  localparam int unsigned CW = 1 + PAW + 2 + TAGW + 4;
  logic [CW-1:0] ctl_d;
  logic          c_valid, c_first, c_last;
  logic [PAW-1:0] c_addr;
  logic [TAGW-1:0] c_tag;
  logic [3:0]      c_shift;
  delay_line #(.W(CW), .D(LM)) u_ctl (
    .clk(clk), .rst_n(rst_n),
    .d({in_valid, paddr, first, last, tag_in, mean_shift}), .q(ctl_d));
  assign {c_valid, c_addr, c_first, c_last, c_tag, c_shift} = ctl_d;

  // ---- dense + sparse ----
  logic signed [QS-1:0] tot [TO];
  logic                 t_valid, t_first, t_last;
  logic [PAW-1:0]       t_addr;
  logic [TAGW-1:0]      t_tag;
  always_ff @(posedge clk) begin
    for (int o = 0; o < TO; o++)
      tot[o] <= (QS'(dsum_d[o]) <<< c_shift) + QS'(ssum_d[o]);
    t_addr  <= c_addr;
    t_first <= c_first;
    t_last  <= c_last;
    t_tag   <= c_tag;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) t_valid <= 1'b0;
    else        t_valid <= c_valid;
  end

  // ---- output buffer (accumulation over input-channel tiles) ----
  logic                 a_valid;
  logic signed [QS-1:0] acc [TO];
  psum_buffer #(.TO(TO), .IW(QS), .DEPTH(PDEPTH), .TAGW(TAGW)) u_psum (
    .clk(clk), .rst_n(rst_n), .in_valid(t_valid), .addr(t_addr), .first(t_first),
    .last(t_last), .tag_in(t_tag), .psum(tot), .out_valid(a_valid), .tag_out(bn_tag),
    .acc(acc));

  // ---- batch norm + quantise ----
  batch_norm #(.TO(TO), .IW(QS)) u_bn (
    .clk(clk), .rst_n(rst_n), .in_valid(a_valid), .acc(acc), .scale(bn_scale),
    .bias(bn_bias), .shift(bn_shift), .out_valid(out_valid), .q(out_q));
  delay_line #(.W(TAGW), .D(2)) u_tag (
    .clk(clk), .rst_n(rst_n), .d(bn_tag), .q(out_tag));
endmodule
