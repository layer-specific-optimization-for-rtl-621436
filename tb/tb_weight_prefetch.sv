// Testbench of weight_prefetch: a random layer (8 input, 4 output channels, blocks
// of 2x2x3x3, a quarter of the blocks without sparse weights) is encoded as a
// parameter word stream. Phase 1 presents the words with random gaps and consumes
// banks after random delays; phase 2 streams without gaps and releases each bank as
// soon as it becomes valid. Every bank is compared with the model (dense bits, count
// and the first count sparse entries). Cycle check: in phase 2 the stream must be
// accepted at one word per cycle (at most 4 extra cycles over the whole layer), and
// in phase 1 the second bank must be filled while the first one is still held.
module tb_weight_prefetch;
  import tb_conv_pkg::*;
  localparam int TI = 2, TO = 2, KK = 9, NM = 4, PW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic p_valid, p_ready, release_valid, release_bank, rd_bank;
  logic [PW-1:0] p_data;
  logic [1:0] bank_valid;
  logic [TO*TI*KK-1:0] dense;
  logic [7:0] cnt;
  logic e_oc [NM], e_ic [NM];
  logic [3:0] e_xy [NM];
  logic signed [7:0] e_w [NM];
  weight_prefetch #(.TI(TI), .TO(TO), .KK(KK), .NM(NM), .PW(PW)) dut (
    .clk(clk), .rst_n(rst_n), .p_valid(p_valid), .p_data(p_data), .p_ready(p_ready),
    .bank_valid(bank_valid), .release_valid(release_valid), .release_bank(release_bank),
    .rd_bank(rd_bank), .dense(dense), .cnt(cnt), .e_oc(e_oc), .e_ic(e_ic), .e_xy(e_xy),
    .e_w(e_w));

  layer_model lm;
  pword_t q [$];
  int wi, both_valid, skipped;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Producer: word wi of the stream, valid with probability gap_pct.
  int gap_pct;
  always @(posedge clk) begin
    if (p_valid && p_ready && rst_n) wi <= wi + 1;
  end

  task automatic check_bank(int b);
    int ok;
    ok = 1;
    for (int o = 0; o < TO; o++)
      for (int i = 0; i < TI; i++)
        for (int t = 0; t < KK; t++) begin
          int mt, nt;
          mt = b / (lm.NT); nt = b % lm.NT;
          if (dense[(o*TI + i)*KK + t] != lm.dense[((mt*TO + o)*lm.N + nt*TI + i)*KK + t]) ok = 0;
        end
    checks++;
    if (!ok) begin failures++; $display("block %0d: dense bits differ", b); end
    checks++;
    if (int'(cnt) != lm.sp_cnt[b]) begin failures++; $display("block %0d: count %0d exp %0d", b, cnt, lm.sp_cnt[b]); end
    if (lm.sp_cnt[b] == 0) skipped++;
    for (int m = 0; m < lm.sp_cnt[b]; m++) begin
      int e;
      e = b*NM + m;
      checks++;
      if (int'(e_oc[m]) != lm.sp_oc[e] || int'(e_ic[m]) != lm.sp_ic[e] ||
          int'(e_xy[m]) != lm.sp_xy[e] || int'(e_w[m]) != lm.sp_w[e]) begin
        failures++; $display("block %0d entry %0d differs", b, m);
      end
    end
  endtask

  task automatic run_phase(int gap, int hold_max, output int cycles);
    int blk, rb;
    blk = 0; rb = 0; cycles = 0;
    gap_pct = gap;
    while (blk < lm.NT * lm.MT) begin
      @(negedge clk);
      cycles++;
      release_valid = 0;
      if (bank_valid == 2'b11) both_valid++;
      if (bank_valid[rb] && ($urandom_range(0, hold_max) == 0)) begin
        rd_bank = 1'(rb);
        #1;
        check_bank(blk);
        release_valid = 1; release_bank = 1'(rb);
        rb ^= 1; blk++;
      end
    end
    @(negedge clk);
    release_valid = 0;
  endtask

  always @(negedge clk) begin
    #2;
    p_valid = (wi < q.size()) && ($urandom_range(0, 99) < gap_pct);
    p_data  = (wi < q.size()) ? q[wi][PW-1:0] : '0;
  end

  initial begin
    int c1, c2, n1;
    p_valid = 0; release_valid = 0; release_bank = 0; rd_bank = 0; wi = 0; gap_pct = 0;
    both_valid = 0; skipped = 0;
    lm = new(8, 4, TI, TO, 3, 1, NM, 4, PW);
    lm.encode(q);
    n1 = q.size();
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_phase(60, 12, c1);
    checks++;
    if (wi != n1) begin failures++; $display("phase 1 consumed %0d of %0d words", wi, n1); end
    checks++;
    if (both_valid == 0) begin failures++; $display("next block never prefetched"); end
    // Phase 2: a second pass over the same weights at full rate.
    lm.encode(q);
    run_phase(100, 0, c2);
    checks++;
    if (wi != q.size()) begin failures++; $display("phase 2 consumed %0d of %0d words", wi, q.size()); end
    checks++;
    if (c2 > (q.size() - n1) + 4) begin
      failures++; $display("phase 2 took %0d cycles for %0d words", c2, q.size() - n1);
    end
    checks++;
    if (skipped == 0) begin failures++; $display("no block without sparse weights"); end
    $display("words %0d, phase 2 cycles %0d, both banks valid %0d cycles, skipped %0d",
             q.size() - n1, c2, both_valid, skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
