// End-to-end testbench of mixed_flow_accel at reduced size.
// Two pipelined first-group layers (3x3 8->8, then a native 1x1 8->8, 6x6 maps,
// 4 channels per tile) feed the main layer, which runs four layers per frame:
//   L0 3x3 8->8 IN->PP (also kept in the shortcut buffer), L1 1x1 8->4 PP->IN,
//   L2 3x3 4->8 IN->PP plus the shortcut, L3 1x1 8->8 from the shortcut buffer to
//   the result port.
// Three frames are streamed in back to back. The main layer's DRAM parameter stream
// has random gaps. Every result word and its address is compared with the software
// model of the whole network. Every mechanism of the design is counted and must have
// happened at least once: weight-prefetch stalls in the first group and in the main
// layer, output back-pressure in the first group, hold-off of the first group by the
// main layer, frame-buffer role swaps, shortcut reads, 1x1 layers and blocks without
// sparse weights. Cycle check: a frame must not take longer than the larger of the
// main layer's compute time (one window per cycle) and its parameter transfer time,
// plus a fixed allowance.
module tb_mixed_flow_accel;
  import tb_conv_pkg::*;
  localparam int NMP = 12;   // first group: up to 12 sparse weights per block
  localparam int T = 4, H = 6, NM = 5, TS = 3, PW = 64, FRAMES = 3, NL = 4, NP = 2;
  localparam int FBD = 2 * H * H;
  localparam int DRAM_PCT = 12;   // probability of a parameter word per cycle

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we; logic [3:0] cfg_unit; logic [1:0] cfg_sel; logic [19:0] cfg_addr;
  logic [PW-1:0] cfg_data;
  logic img_valid, img_ready, p_valid, p_ready, res_valid, frame_done;
  logic [T*8-1:0] img_data, res_data;
  logic [PW-1:0] p_data;
  logic [$clog2(FBD)-1:0] res_addr;
  logic [31:0] s_pw [NP], s_po [NP], s_pr [NP];
  logic [31:0] s_w, s_f, s_sw, s_sc;

  mixed_flow_accel #(
    .PIPE_LAYERS(NP), .T(T), .H_PIPE(H), .P_N('{8, 8, 0, 0, 0, 0, 0, 0}),
    .P_M('{8, 8, 0, 0, 0, 0, 0, 0}), .P_K('{3, 1, 0, 0, 0, 0, 0, 0}),
    .NM_PIPE(NMP), .TS_PIPE(TS), .PW_PIPE(PW), .H_MAX(H), .FB_DEPTH(FBD), .NM_MAIN(NM),
    .TS_MAIN(TS), .PW_DRAM(PW), .MAXL(4), .BN_DEPTH(64)
  ) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_unit(cfg_unit), .cfg_sel(cfg_sel),
    .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .img_valid(img_valid), .img_data(img_data), .img_ready(img_ready),
    .dram_p_valid(p_valid), .dram_p_data(p_data), .dram_p_ready(p_ready),
    .res_valid(res_valid), .res_data(res_data), .res_addr(res_addr), .frame_done(frame_done),
    .stat_pipe_wstall(s_pw), .stat_pipe_ostall(s_po), .stat_pipe_rows(s_pr),
    .stat_main_wstall(s_w), .stat_main_fstall(s_f), .stat_main_swaps(s_sw),
    .stat_main_sc(s_sc));

  // first group
  layer_model pm [NP];
  int pk [NP] = '{3, 1};
  // main layer
  layer_model lm [NL];
  int ln [NL] = '{8, 8, 4, 8};
  int lmo[NL] = '{8, 4, 8, 8};
  bit lk1[NL] = '{0, 1, 0, 1};
  int lsrc[NL] = '{0, 1, 0, 2};
  int ldst[NL] = '{1, 0, 1, 3};
  bit ladd[NL] = '{0, 0, 1, 0};
  bit lsc [NL] = '{1, 0, 1, 0};
  int lbase[NL] = '{0, 8, 12, 20};

  int act [FRAMES][];
  int expv[FRAMES][];
  pword_t pq[$];
  int words_per_frame, compute_per_frame;

  // ---------------- DRAM parameter stream with gaps ----------------
  int pi = 0;
  always @(negedge clk) begin
    p_valid = rst_n && pi < pq.size() && ($urandom_range(0, 99) < DRAM_PCT);
    p_data  = (pi < pq.size()) ? pq[pi][PW-1:0] : '0;
  end
  always @(posedge clk) if (rst_n && p_valid && p_ready) pi <= pi + 1;

  // ---------------- input image stream (row, tile, column) ----------------
  localparam int WPF = H * 2 * H;
  int ii = 0;
  logic go = 0;
  always @(negedge clk) begin
    img_valid = go && ii < FRAMES * WPF;
    if (ii < FRAMES * WPF) begin
      int f, k, y, t, x;
      f = ii / WPF; k = ii % WPF; y = k / (2 * H); t = (k / H) % 2; x = k % H;
      for (int l = 0; l < T; l++) img_data[l*8 +: 8] = 8'(act[f][(y*H + x)*8 + t*T + l]);
    end
  end
  always @(posedge clk) if (rst_n && img_valid && img_ready) ii <= ii + 1;

  // ---------------- result check ----------------
  int oi = 0, frames_done = 0, cyc = 0;
  int done_at [FRAMES];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && frame_done) begin
      if (frames_done < FRAMES) done_at[frames_done] <= cyc;
      frames_done <= frames_done + 1;
    end
    if (rst_n && res_valid) begin
      int f, mt, pix;
      f = oi / (2 * H * H);
      mt = int'(res_addr) / (H * H); pix = int'(res_addr) % (H * H);
      checks++;
      if (int'(res_addr) != oi % (2 * H * H)) begin
        failures++; $display("result %0d: address %0d", oi, res_addr);
      end
      for (int l = 0; l < T; l++) begin
        checks++;
        if (f >= FRAMES || int'($signed(res_data[l*8 +: 8])) != expv[f][pix * 8 + mt * T + l]) begin
          failures++;
          if (failures < 10) $display("frame %0d addr %0d lane %0d got %0d", f, res_addr, l,
                                      $signed(res_data[l*8 +: 8]));
        end
      end
      oi <= oi + 1;
    end
  end

  initial begin
    repeat (60000) @(posedge clk);
    $display("watchdog: %0d results, %0d frames", oi, frames_done);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input int unit, input int sel, input int addr, input logic [PW-1:0] data);
    cfg_we = 1; cfg_unit = 4'(unit); cfg_sel = 2'(sel); cfg_addr = 20'(addr); cfg_data = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic count(input string what, input longint n);
    checks++;
    if (n <= 0) begin failures++; $display("mechanism never happened: %s", what); end
    else $display("  %-34s %0d", what, n);
  endtask

  initial begin
    int zero_blocks, k1_layers;
    cfg_we = 0; cfg_unit = 0; cfg_sel = 0; cfg_addr = 0; cfg_data = 0;
    // layer 0 gets 10..12 sparse weights in every block, so that its parameter
    // records (7 words) are longer than a row pass (6 windows): weight stalls
    pm[0] = new(8, 8, T, T, 3, H, NMP, TS, PW, 0, -1, 0, 10);
    pm[1] = new(8, 8, T, T, 1, H, NMP, TS, PW);
    for (int l = 0; l < NL; l++) lm[l] = new(ln[l], lmo[l], T, T, 3, H, NM, TS, PW, lk1[l]);
    words_per_frame = 0; compute_per_frame = 0;
    for (int f = 0; f < FRAMES; f++) begin
      int a0[], a1[], o0[], o1[], o2[], o3[];
      int n0;
      act[f] = new[H * H * 8];
      foreach (act[f][j]) act[f][j] = $urandom_range(0, 255) - 128;
      pm[0].compute(act[f], a0);
      pm[1].compute(a0, a1);
      lm[0].compute(a1, o0);
      lm[1].compute(o0, o1);
      lm[2].compute(o1, o2);
      foreach (o2[j]) o2[j] = sat8(longint'(o2[j]) + o0[j]);
      lm[3].compute(o2, o3);
      expv[f] = o3;
      n0 = pq.size();
      for (int l = 0; l < NL; l++) lm[l].encode(pq);
      words_per_frame = pq.size() - n0;
    end
    for (int l = 0; l < NL; l++) compute_per_frame += H * H * lm[l].NT * lm[l].MT;
    zero_blocks = 0; k1_layers = 0;
    for (int g = 0; g < NP; g++) begin
      foreach (pm[g].sp_cnt[b]) if (pm[g].sp_cnt[b] == 0) zero_blocks++;
      if (pk[g] == 1) k1_layers++;
    end
    for (int l = 0; l < NL; l++) begin
      foreach (lm[l].sp_cnt[b]) if (lm[l].sp_cnt[b] == 0) zero_blocks++;
      if (lk1[l]) k1_layers++;
    end

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // first group: parameters into the on-chip memories
    for (int g = 0; g < NP; g++) begin
      pword_t q[$];
      logic [PW-1:0] d;
      q.delete();
      pm[g].encode(q);
      foreach (q[i]) cfg(g, 0, i, q[i][PW-1:0]);
      for (int o = 0; o < 8; o++) begin
        d = '0; d[15:0] = 16'(pm[g].scale[o]); d[31:16] = 16'(pm[g].bias[o]);
        cfg(g, 1, o, d);
      end
      d = '0; d[19:0] = 20'(q.size()); d[23:20] = 4'(pm[g].mean_shift);
      d[29:24] = 6'(pm[g].bn_shift); d[30] = 1'b1;
      cfg(g, 2, 0, d);
    end
    // main layer: layer descriptors, batch-norm table, enable
    for (int l = 0; l < NL; l++) begin
      logic [63:0] d;
      d = '0;
      d[6:0] = 7'(H); d[14:7] = 8'(ln[l] / T); d[22:15] = 8'(lmo[l] / T); d[23] = lk1[l];
      d[25:24] = 2'(lsrc[l]); d[27:26] = 2'(ldst[l]); d[28] = ladd[l];
      d[32:29] = 4'(lm[l].mean_shift); d[38:33] = 6'(lm[l].bn_shift);
      d[50:39] = 12'(lbase[l]); d[51] = lsc[l];
      cfg(NP, 0, l, d);
      for (int o = 0; o < lmo[l]; o++)
        cfg(NP, 1, lbase[l] + o, {32'd0, 16'(lm[l].bias[o]), 16'(lm[l].scale[o])});
    end
    cfg(NP, 2, 0, 64'((NL << 1) | 1));
    go = 1;
    wait (frames_done == FRAMES);
    repeat (5) @(posedge clk);
    checks++; if (oi != FRAMES * 2 * H * H) begin failures++; $display("results %0d", oi); end
    for (int g = 0; g < NP; g++) begin
      checks++;
      if (s_pr[g] != FRAMES * H) begin failures++; $display("layer %0d rows %0d", g, s_pr[g]); end
    end
    checks++;
    if (s_sc != FRAMES * 4 * H * H) begin failures++; $display("shortcut reads %0d", s_sc); end
    $display("mechanisms:");
    count("first-group weight-prefetch stalls", s_pw[0] + s_pw[1]);
    count("first-group output back-pressure", s_po[0] + s_po[1]);
    count("main-layer weight-prefetch stalls", s_w);
    count("first group held off by main layer", s_f);
    count("frame-buffer role swaps", s_sw);
    count("shortcut buffer reads", s_sc);
    count("frames completed", frames_done);
    count("1x1 layers", k1_layers);
    count("blocks without sparse weights", zero_blocks);
    // frame time: steady-state frames 2 and 3
    begin
      int per, bound;
      per = done_at[FRAMES-1] - done_at[FRAMES-2];
      bound = compute_per_frame;
      if (words_per_frame * 100 / DRAM_PCT > bound) bound = words_per_frame * 100 / DRAM_PCT;
      bound = bound + bound / 4 + 8 * H * 4;
      checks++;
      if (per > bound) begin failures++; $display("frame took %0d cycles, bound %0d", per, bound); end
      $display("frame interval %0d cycles (compute %0d, parameter words %0d, bound %0d)",
               per, compute_per_frame, words_per_frame, bound);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
