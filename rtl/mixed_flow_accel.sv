// Mixed-data-flow, mixed-precision CNN accelerator (top level).
//
// The network is split at a group boundary. Layers before the boundary (the first
// group) each have their own pipelined_layer unit; they are chained through their
// row buffers, so a layer starts as soon as a few rows of its input exist and no
// feature map of this group ever leaves the chip. Their dense and sparse parameters
// sit in on-chip memories. The last first-group layer streams its output frame into
// the main layer, which runs all layers after the boundary one after another with
// full weight reuse, keeps every intermediate frame in its on-chip frame buffers and
// reads each of those layers' parameters once per frame from DRAM. Only the input
// image, the second group's parameters and the final output cross the chip boundary.
//
// The default configuration is the part of the first group of Sim-YOLO-v2 that
// directly precedes the paper's chosen boundary (CONV12): CONV9..CONV12 at 26x26,
// alternating 3x3 and 1x1 layers of 256/512 channels, with T = 16 channels per tile
// everywhere (Ti = To in every layer keeps the pipeline balanced, and 16 matches the
// main layer). The earlier first-group layers of that network are separated by
// max-pooling, which the paper does not describe and this design does not contain;
// the input port therefore carries the 26x26x256 feature map that feeds CONV9.
// The main layer is sized for CONV13..CONV17 (26x26 frames, up to 1024 channels).
//
// Ports: one configuration bus (cfg_unit selects pipelined layer 0..PIPE_LAYERS-1, or
// the main layer at PIPE_LAYERS; see those modules for cfg_sel/cfg_addr/cfg_data),
// the input feature-map stream (order row, channel tile, column; T channels per
// word), the DRAM parameter stream of the main layer, and the result stream with its
// frame-buffer word address. Activity counters are brought out for monitoring.
module mixed_flow_accel
  import mp_pkg::*;
#(
  parameter int unsigned PIPE_LAYERS = 4,
  parameter int unsigned T           = 16,
  parameter int unsigned H_PIPE      = 26,
  // per-layer input channels, output channels and kernel size of the first group;
  // entries at and beyond PIPE_LAYERS are ignored (at most 8 pipelined layers)
  parameter int unsigned P_N [8] = '{256, 512, 256, 512, 0, 0, 0, 0},
  parameter int unsigned P_M [8] = '{512, 256, 512, 256, 0, 0, 0, 0},
  parameter int unsigned P_K [8] = '{3, 1, 3, 1, 0, 0, 0, 0},
  parameter int unsigned NM_PIPE     = 27,
  parameter int unsigned TS_PIPE     = 8,
  parameter int unsigned PW_PIPE     = 256,
  parameter int unsigned H_MAX       = 26,
  parameter int unsigned FB_DEPTH    = 10816,
  parameter int unsigned NM_MAIN     = 27,
  parameter int unsigned TS_MAIN     = 8,
  parameter int unsigned PW_DRAM     = 64,
  parameter int unsigned MAXL        = 8,
  parameter int unsigned BN_DEPTH    = 4096,
  localparam int unsigned FAW        = idx_w(FB_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration bus
  input  logic               cfg_we,
  input  logic [3:0]         cfg_unit,
  input  logic [1:0]         cfg_sel,
  input  logic [19:0]        cfg_addr,
  input  logic [PW_PIPE-1:0] cfg_data,
  // input feature map
  input  logic               img_valid,
  input  logic [T*QA-1:0]    img_data,
  output logic               img_ready,
  // DRAM: parameters of the main layer
  input  logic               dram_p_valid,
  input  logic [PW_DRAM-1:0] dram_p_data,
  output logic               dram_p_ready,
  // DRAM: results
  output logic               res_valid,
  output logic [T*QA-1:0]    res_data,
  output logic [FAW-1:0]     res_addr,
  output logic               frame_done,
  // activity counters
  output logic [31:0]        stat_pipe_wstall [PIPE_LAYERS],
  output logic [31:0]        stat_pipe_ostall [PIPE_LAYERS],
  output logic [31:0]        stat_pipe_rows   [PIPE_LAYERS],
  output logic [31:0]        stat_main_wstall,
  output logic [31:0]        stat_main_fstall,
  output logic [31:0]        stat_main_swaps,
  output logic [31:0]        stat_main_sc
);
  logic            s_valid [PIPE_LAYERS+1];
  logic [T*QA-1:0] s_data  [PIPE_LAYERS+1];
  logic            s_ready [PIPE_LAYERS+1];

  assign s_valid[0] = img_valid;
  assign s_data[0]  = img_data;
  assign img_ready  = s_ready[0];

  for (genvar g = 0; g < PIPE_LAYERS; g++) begin : g_pipe
    pipelined_layer #(
      .N(P_N[g]), .M(P_M[g]), .TI(T), .TO(T), .K(P_K[g]), .H(H_PIPE),
      .NM(NM_PIPE), .TS(TS_PIPE), .PW(PW_PIPE)
    ) u_layer (
      .clk(clk), .rst_n(rst_n),
      .cfg_we(cfg_we && int'(cfg_unit) == g), .cfg_sel(cfg_sel), .cfg_addr(cfg_addr),
      .cfg_data(cfg_data),
      .in_valid(s_valid[g]), .in_data(s_data[g]), .in_ready(s_ready[g]),
      .out_valid(s_valid[g+1]), .out_data(s_data[g+1]), .out_ready(s_ready[g+1]),
      .stat_wstall(stat_pipe_wstall[g]), .stat_ostall(stat_pipe_ostall[g]),
      .stat_rows(stat_pipe_rows[g]));
  end

  main_layer #(
    .T(T), .K(3), .H_MAX(H_MAX), .FB_DEPTH(FB_DEPTH), .NM(NM_MAIN), .TS(TS_MAIN),
    .PW(PW_DRAM), .MAXL(MAXL), .BN_DEPTH(BN_DEPTH)
  ) u_main (
    .clk(clk), .rst_n(rst_n),
    .cfg_we(cfg_we && int'(cfg_unit) == PIPE_LAYERS), .cfg_sel(cfg_sel),
    .cfg_addr(cfg_addr[15:0]), .cfg_data(cfg_data[63:0]),
    .in_valid(s_valid[PIPE_LAYERS]), .in_data(s_data[PIPE_LAYERS]),
    .in_ready(s_ready[PIPE_LAYERS]),
    .p_valid(dram_p_valid), .p_data(dram_p_data), .p_ready(dram_p_ready),
    .out_valid(res_valid), .out_data(res_data), .out_addr(res_addr),
    .frame_done(frame_done),
    .stat_wstall(stat_main_wstall), .stat_fstall(stat_main_fstall),
    .stat_swaps(stat_main_swaps), .stat_sc(stat_main_sc));
endmodule
