// Full-size testbench of mixed_flow_accel: the top with all parameters at their
// defaults (four first-group layers CONV9..CONV12 of Sim-YOLO-v2 at 26x26 with
// 256/512 channels, 16-channel tiles, and the main layer sized for 26x26 frames).
// One 26x26x256 frame with random weights and activations is pushed through the
// four pipelined layers; the main layer is given one layer, a 1x1 convolution of the
// 256-channel result down to 16 channels, which it writes to the result port. Every
// result word and address is compared with the software model. Cycle check: the
// first-group layers issue one window per cycle and each starts a few rows after the
// layer before it, so the frame must be done within the busiest layer's window count
// (26*26*16*32 = 346,112) plus the start-up delay of the chain (at most 2 rows of a
// 3x3 layer and 1 row of a 1x1 layer, 13,312 cycles per row) plus the main layer's
// 26*26*16 windows and a small allowance.
module tb_mixed_flow_accel_full;
  import tb_conv_pkg::*;
  localparam int T = 16, H = 26, NP = 4, NMAIN = 256, MMAIN = 16;
  localparam int PLEN = 26 * 26 * 16 * 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we; logic [3:0] cfg_unit; logic [1:0] cfg_sel; logic [19:0] cfg_addr;
  logic [255:0] cfg_data;
  logic img_valid, img_ready, p_valid, p_ready, res_valid, frame_done;
  logic [T*8-1:0] img_data, res_data;
  logic [63:0] p_data;
  logic [13:0] res_addr;
  logic [31:0] s_pw [NP], s_po [NP], s_pr [NP];
  logic [31:0] s_w, s_f, s_sw, s_sc;

  mixed_flow_accel dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_unit(cfg_unit), .cfg_sel(cfg_sel),
    .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .img_valid(img_valid), .img_data(img_data), .img_ready(img_ready),
    .dram_p_valid(p_valid), .dram_p_data(p_data), .dram_p_ready(p_ready),
    .res_valid(res_valid), .res_data(res_data), .res_addr(res_addr), .frame_done(frame_done),
    .stat_pipe_wstall(s_pw), .stat_pipe_ostall(s_po), .stat_pipe_rows(s_pr),
    .stat_main_wstall(s_w), .stat_main_fstall(s_f), .stat_main_swaps(s_sw),
    .stat_main_sc(s_sc));

  layer_model pm [NP];
  int pn [NP] = '{256, 512, 256, 512};
  int pmo[NP] = '{512, 256, 512, 256};
  int pk [NP] = '{3, 1, 3, 1};
  layer_model lm;
  int act[], expv[];
  pword_t pq[$];

  // DRAM parameter stream, no gaps
  int pi = 0;
  always @(negedge clk) begin
    p_valid = rst_n && pi < pq.size();
    p_data  = (pi < pq.size()) ? pq[pi][63:0] : '0;
  end
  always @(posedge clk) if (rst_n && p_valid && p_ready) pi <= pi + 1;

  // input frame, order (row, tile, column)
  localparam int WPF = H * (256 / T) * H;
  int ii = 0;
  logic go = 0;
  always @(negedge clk) begin
    img_valid = go && ii < WPF;
    if (ii < WPF) begin
      int y, t, x;
      y = ii / (16 * H); t = (ii / H) % 16; x = ii % H;
      for (int l = 0; l < T; l++) img_data[l*8 +: 8] = 8'(act[(y*H + x)*256 + t*T + l]);
    end
  end
  always @(posedge clk) if (rst_n && img_valid && img_ready) ii <= ii + 1;

  int oi = 0, frames = 0, cyc = 0, t_go = 0, t_done = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && frame_done) begin frames <= frames + 1; t_done <= cyc; end
    if (rst_n && res_valid) begin
      int ra;
      ra = int'(res_addr);
      checks++;
      if (int'(res_addr) != oi) begin failures++; $display("result %0d: address %0d", oi, res_addr); end
      for (int l = 0; l < T; l++) begin
        checks++;
        if (int'($signed(res_data[l*8 +: 8])) != expv[ra * MMAIN + l]) begin
          failures++;
          if (failures < 10) $display("addr %0d lane %0d got %0d exp %0d", res_addr, l,
                                      $signed(res_data[l*8 +: 8]), expv[ra * MMAIN + l]);
        end
      end
      oi <= oi + 1;
    end
  end

  initial begin
    repeat (1500000) @(posedge clk);
    $display("watchdog: %0d results", oi);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input int unit, input int sel, input int addr, input logic [255:0] data);
    cfg_we = 1; cfg_unit = 4'(unit); cfg_sel = 2'(sel); cfg_addr = 20'(addr); cfg_data = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    int a [NP+1][];
    cfg_we = 0; cfg_unit = 0; cfg_sel = 0; cfg_addr = 0; cfg_data = 0;
    act = new[H * H * 256];
    foreach (act[j]) act[j] = $urandom_range(0, 255) - 128;
    a[0] = act;
    for (int g = 0; g < NP; g++) begin
      pm[g] = new(pn[g], pmo[g], T, T, pk[g], H, 27, 8, 256);
      pm[g].bn_shift = 14;
      pm[g].compute(a[g], a[g+1]);
    end
    lm = new(NMAIN, MMAIN, T, T, 3, H, 27, 8, 64, 1);
    lm.compute(a[NP], expv);
    lm.encode(pq);

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int g = 0; g < NP; g++) begin
      pword_t q[$];
      logic [255:0] d;
      q.delete();
      pm[g].encode(q);
      foreach (q[i]) cfg(g, 0, i, q[i]);
      for (int o = 0; o < pmo[g]; o++) begin
        d = '0; d[15:0] = 16'(pm[g].scale[o]); d[31:16] = 16'(pm[g].bias[o]);
        cfg(g, 1, o, d);
      end
      d = '0; d[19:0] = 20'(q.size()); d[23:20] = 4'(pm[g].mean_shift);
      d[29:24] = 6'(pm[g].bn_shift); d[30] = 1'b1;
      cfg(g, 2, 0, d);
    end
    begin
      logic [63:0] d;
      d = '0;
      d[6:0] = 7'(H); d[14:7] = 8'(NMAIN / T); d[22:15] = 8'(MMAIN / T); d[23] = 1'b1;
      d[25:24] = 2'd0; d[27:26] = 2'd3;
      d[32:29] = 4'(lm.mean_shift); d[38:33] = 6'(lm.bn_shift);
      cfg(NP, 0, 0, 256'(d));
      for (int o = 0; o < MMAIN; o++)
        cfg(NP, 1, o, 256'({16'(lm.bias[o]), 16'(lm.scale[o])}));
      cfg(NP, 2, 0, 256'((1 << 1) | 1));
    end
    go = 1;
    t_go = cyc;
    wait (frames == 1);
    repeat (5) @(posedge clk);
    checks++; if (oi != H * H) begin failures++; $display("results %0d", oi); end
    for (int g = 0; g < NP; g++) begin
      checks++;
      if (s_pr[g] != H) begin failures++; $display("layer %0d rows %0d", g, s_pr[g]); end
    end
    checks++;
    if (t_done - t_go > PLEN + 6 * (PLEN / H) + H * H * 16 + 2000) begin
      failures++; $display("frame took %0d cycles", t_done - t_go);
    end
    $display("frame: %0d cycles (first-group layer: %0d windows)", t_done - t_go, PLEN);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
