// Testbench of main_layer (Scheme 2, frame buffers, shortcut buffer).
// Four layers are run per frame, on three frames sent back to back:
//   L0 3x3  8->8  IN->PP, output also kept in the shortcut buffer SC
//   L1 1x1  8->4  PP->IN
//   L2 3x3  4->8  IN->PP, adds SC element-wise, result also written to SC
//   L3 1x1  8->8  SC->output port (the shortcut buffer used as an input buffer)
// Expected results come from the software layer model. The DRAM parameter stream
// has random gaps (weight stalls), and the third frame arrives while the first is
// still being processed (the first group is held off). Checks every output word,
// its address, the frame count and that each mechanism happened.
module tb_main_layer;
  import tb_conv_pkg::*;
  localparam int T = 4, H = 6, NM = 5, TS = 3, PW = 64, FRAMES = 3, NL = 4;
  localparam int FBD = 2 * H * H;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we; logic [1:0] cfg_sel; logic [15:0] cfg_addr; logic [63:0] cfg_data;
  logic in_valid, in_ready, p_valid, p_ready, out_valid, frame_done;
  logic [T*8-1:0] in_data, out_data;
  logic [PW-1:0] p_data;
  logic [$clog2(FBD)-1:0] out_addr;
  logic [31:0] s_w, s_f, s_sw, s_sc;

  main_layer #(.T(T), .K(3), .H_MAX(H), .FB_DEPTH(FBD), .NM(NM), .TS(TS), .PW(PW),
               .MAXL(4), .BN_DEPTH(64)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_sel(cfg_sel), .cfg_addr(cfg_addr),
    .cfg_data(cfg_data), .in_valid(in_valid), .in_data(in_data), .in_ready(in_ready),
    .p_valid(p_valid), .p_data(p_data), .p_ready(p_ready), .out_valid(out_valid),
    .out_data(out_data), .out_addr(out_addr), .frame_done(frame_done),
    .stat_wstall(s_w), .stat_fstall(s_f), .stat_swaps(s_sw), .stat_sc(s_sc));

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

  // ---------------- parameter stream with gaps ----------------
  int pi = 0;
  always @(negedge clk) begin
    p_valid = rst_n && pi < pq.size() && ($urandom_range(0, 9) == 0);
    p_data  = (pi < pq.size()) ? pq[pi][PW-1:0] : '0;
  end
  always @(posedge clk) if (rst_n && p_valid && p_ready) pi <= pi + 1;

  // ---------------- input frames ----------------
  localparam int WPF = H * 2 * H;
  int ii = 0;
  logic go = 0;
  always @(negedge clk) begin
    in_valid = go && ii < FRAMES * WPF;
    if (ii < FRAMES * WPF) begin
      int f, k, y, t, x;
      f = ii / WPF; k = ii % WPF; y = k / (2 * H); t = (k / H) % 2; x = k % H;
      for (int l = 0; l < T; l++) in_data[l*8 +: 8] = 8'(act[f][(y*H + x)*8 + t*T + l]);
    end
  end
  always @(posedge clk) if (rst_n && in_valid && in_ready) ii <= ii + 1;

  // ---------------- output check ----------------
  int oi = 0, frames_done = 0;
  always @(posedge clk) begin
    if (rst_n && frame_done) frames_done <= frames_done + 1;
    if (rst_n && out_valid) begin
      int f, mt, pix;
      f = oi / (2 * H * H);
      mt = int'(out_addr) / (H * H); pix = int'(out_addr) % (H * H);
      checks++;
      if (int'(out_addr) != oi % (2 * H * H)) begin
        failures++; $display("out %0d: address %0d", oi, out_addr);
      end
      for (int l = 0; l < T; l++) begin
        checks++;
        if (int'($signed(out_data[l*8 +: 8])) != expv[f][pix * 8 + mt * T + l]) begin
          failures++;
          if (failures < 10) $display("frame %0d addr %0d lane %0d got %0d exp %0d", f, out_addr, l,
                                      $signed(out_data[l*8 +: 8]), expv[f][pix * 8 + mt * T + l]);
        end
      end
      oi <= oi + 1;
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog: %0d outputs, %0d frames", oi, frames_done);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input int sel, input int addr, input logic [63:0] data);
    cfg_we = 1; cfg_sel = 2'(sel); cfg_addr = 16'(addr); cfg_data = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    cfg_we = 0; cfg_sel = 0; cfg_addr = 0; cfg_data = 0;
    for (int l = 0; l < NL; l++) lm[l] = new(ln[l], lmo[l], T, T, 3, H, NM, TS, PW, lk1[l]);
    for (int f = 0; f < FRAMES; f++) begin
      int o0[], o1[], o2[], o3[], sc[];
      act[f] = new[H * H * 8];
      foreach (act[f][j]) act[f][j] = $urandom_range(0, 255) - 128;
      lm[0].compute(act[f], o0);
      lm[1].compute(o0, o1);
      lm[2].compute(o1, o2);
      foreach (o2[j]) o2[j] = sat8(longint'(o2[j]) + o0[j]);
      lm[3].compute(o2, o3);
      expv[f] = o3;
      for (int l = 0; l < NL; l++) lm[l].encode(pq);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int l = 0; l < NL; l++) begin
      logic [63:0] d;
      d = '0;
      d[6:0] = 7'(H); d[14:7] = 8'(ln[l] / T); d[22:15] = 8'(lmo[l] / T); d[23] = lk1[l];
      d[25:24] = 2'(lsrc[l]); d[27:26] = 2'(ldst[l]); d[28] = ladd[l];
      d[32:29] = 4'(lm[l].mean_shift); d[38:33] = 6'(lm[l].bn_shift);
      d[50:39] = 12'(lbase[l]); d[51] = lsc[l];
      cfg(0, l, d);
      for (int o = 0; o < lmo[l]; o++)
        cfg(1, lbase[l] + o, {32'd0, 16'(lm[l].bias[o]), 16'(lm[l].scale[o])});
    end
    cfg(2, 0, 64'((NL << 1) | 1));
    go = 1;
    wait (frames_done == FRAMES);
    repeat (5) @(posedge clk);
    checks++; if (oi != FRAMES * 2 * H * H) begin failures++; $display("outputs %0d", oi); end
    checks++; if (s_sw != FRAMES) begin failures++; $display("swaps %0d", s_sw); end
    checks++; if (s_w == 0) begin failures++; $display("no weight stall"); end
    checks++; if (s_f == 0) begin failures++; $display("first group never held off"); end
    checks++; if (s_sc != FRAMES * 4 * H * H) begin failures++; $display("shortcut ops %0d", s_sc); end
    $display("weight stalls %0d, input hold-off %0d, swaps %0d, shortcut ops %0d", s_w, s_f, s_sw, s_sc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
