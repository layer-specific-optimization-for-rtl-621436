// Testbench of conv_core, the mixed-precision convolution datapath.
// Random windows are pushed one per cycle with random weight blocks; for several
// positions the sum over NT input-channel tiles is accumulated in the output buffer
// and then batch-normalised. Expected outputs are computed here directly from the
// definition (dense +-a << mean_shift, sparse w*a, scale, shift, bias, saturate).
// Also checks the fixed latency LAT from window to output.
module tb_conv_core;
  import tb_conv_pkg::*;
  localparam int TI = 4, TO = 4, K = 3, KK = 9, NM = 5, TS = 3, PD = 8, NT = 3;
  localparam int NP = 6;               // positions per pass
  localparam int LD = 1 + $clog2(TI*KK), LS = 2 + $clog2(TS);
  localparam int LAT = ((LD > LS) ? LD : LS) + 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, first, last;
  logic signed [7:0] win [TI*KK];
  logic [2:0] paddr;
  logic [7:0] tag_in, bn_tag, out_tag;
  logic [TO*TI*KK-1:0] dense;
  logic [7:0] cnt;
  logic [1:0] e_oc [NM], e_ic [NM];
  logic [3:0] e_xy [NM];
  logic signed [7:0] e_w [NM];
  logic signed [15:0] bn_scale [TO], bn_bias [TO];
  logic out_valid;
  logic signed [7:0] out_q [TO];

  conv_core #(.TI(TI), .TO(TO), .K(K), .NM(NM), .TS(TS), .PDEPTH(PD), .TAGW(8)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .win(win), .paddr(paddr), .first(first),
    .last(last), .tag_in(tag_in), .dense(dense), .cnt(cnt), .e_oc(e_oc), .e_ic(e_ic),
    .e_xy(e_xy), .e_w(e_w), .mean_shift(4'd3), .bn_tag(bn_tag), .bn_scale(bn_scale),
    .bn_bias(bn_bias), .bn_shift(6'd7), .out_valid(out_valid), .out_q(out_q), .out_tag(out_tag));

  longint acc [NP][TO];
  int exp_q [NP][TO];
  int issue_cyc [NP];
  int cyc = 0;
  always @(posedge clk) cyc++;

  always_comb for (int o = 0; o < TO; o++) begin
    bn_scale[o] = 16'(10 + o * 7 + int'(bn_tag));
    bn_bias[o]  = 16'(o - 2);
  end

  int seen = 0;
  always @(posedge clk) begin
    if (out_valid) begin
      int p;
      p = int'(out_tag);
      checks++;
      // out_valid rises LAT edges after the window was applied; it is sampled one edge later
      if (cyc - issue_cyc[p] != LAT + 1) begin
        failures++; $display("latency %0d, expected %0d", cyc - issue_cyc[p], LAT);
      end
      for (int o = 0; o < TO; o++) begin
        checks++;
        if (int'(out_q[o]) != exp_q[p][o]) begin
          failures++;
          if (failures < 10) $display("pos %0d ch %0d got %0d exp %0d", p, o, out_q[o], exp_q[p][o]);
        end
      end
      seen++;
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; first = 0; last = 0; paddr = 0; tag_in = 0; cnt = 0; dense = '0;
    foreach (win[i]) win[i] = 0;
    for (int m = 0; m < NM; m++) begin e_oc[m] = 0; e_ic[m] = 0; e_xy[m] = 0; e_w[m] = 0; end
    foreach (acc[p, o]) acc[p][o] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int nt = 0; nt < NT; nt++) begin
      int per_oc [TO];
      // new weight block for this pass
      for (int j = 0; j < TO*TI*KK; j++) dense[j] = 1'($urandom_range(0, 1));
      cnt = (nt == 1) ? 0 : 8'($urandom_range(1, NM));
      foreach (per_oc[o]) per_oc[o] = 0;
      for (int m = 0; m < NM; m++) begin
        int oc;
        oc = $urandom_range(0, TO-1);
        while (per_oc[oc] >= TS) oc = (oc + 1) % TO;
        if (m < cnt) per_oc[oc]++;
        e_oc[m] = 2'(oc); e_ic[m] = 2'($urandom_range(0, TI-1));
        e_xy[m] = 4'($urandom_range(0, KK-1)); e_w[m] = 8'($urandom_range(0, 255));
      end
      for (int p = 0; p < NP; p++) begin
        for (int i = 0; i < TI*KK; i++) win[i] = 8'($urandom_range(0, 255));
        for (int o = 0; o < TO; o++) begin
          for (int i = 0; i < TI*KK; i++)
            acc[p][o] += (dense[o*TI*KK + i] ? longint'(win[i]) : -longint'(win[i])) * 8;
          for (int m = 0; m < int'(cnt); m++)
            if (int'(e_oc[m]) == o) acc[p][o] += longint'(e_w[m]) * win[int'(e_ic[m])*KK + int'(e_xy[m])];
          if (nt == NT - 1)
            exp_q[p][o] = sat8(((acc[p][o] * (10 + o * 7 + p)) >>> 7) + (o - 2));
        end
        in_valid = 1; paddr = 3'(p); first = (nt == 0); last = (nt == NT - 1); tag_in = 8'(p);
        issue_cyc[p] = cyc;
        @(negedge clk);
      end
    end
    in_valid = 0;
    repeat (LAT + 5) @(negedge clk);
    checks++;
    if (seen != NP) begin failures++; $display("saw %0d outputs", seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
