// Testbench of sparse_kernel: every cycle a random window and a random list of up
// to NM sparse weights (at most TS per output channel, sometimes none, sometimes
// with the kernel disabled). Each output channel must equal the sum of w * a over
// its entries, 2 + clog2(TS) cycles later.
module tb_sparse_kernel;
  localparam int TI = 4, TO = 4, KK = 9, NM = 6, TS = 3, LAT = 2 + $clog2(TS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en;
  logic signed [7:0] act [TI*KK];
  logic [7:0] cnt;
  logic [1:0] e_oc [NM], e_ic [NM];
  logic [3:0] e_xy [NM];
  logic signed [7:0] e_w [NM];
  logic signed [17:0] psum [TO];
  sparse_kernel #(.TI(TI), .TO(TO), .KK(KK), .NM(NM), .TS(TS)) dut (
    .clk(clk), .rst_n(rst_n), .en(en), .act(act), .cnt(cnt), .e_oc(e_oc), .e_ic(e_ic),
    .e_xy(e_xy), .e_w(e_w), .psum(psum));

  typedef int vec_t [TO];
  int h [$];   // expected values, TO per input, flattened
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    en = 0; cnt = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 300; c++) begin
      vec_t e;
      int per [TO];
      @(negedge clk);
      en  = (c % 11 != 3);
      cnt = (c % 9 == 0) ? 0 : 8'($urandom_range(1, NM));
      foreach (per[o]) per[o] = 0;
      foreach (e[o]) e[o] = 0;
      for (int i = 0; i < TI*KK; i++) act[i] = 8'($urandom_range(0, 255));
      for (int m = 0; m < NM; m++) begin
        int oc;
        oc = $urandom_range(0, TO-1);
        while (per[oc] >= TS) oc = (oc + 1) % TO;
        if (m < cnt) per[oc]++;
        e_oc[m] = 2'(oc); e_ic[m] = 2'($urandom_range(0, TI-1));
        e_xy[m] = 4'($urandom_range(0, KK-1)); e_w[m] = 8'($urandom_range(0, 255));
        if (en && m < cnt) e[oc] += int'(e_w[m]) * int'(act[int'(e_ic[m])*KK + int'(e_xy[m])]);
      end
      for (int o = 0; o < TO; o++) h.push_back(e[o]);
      @(posedge clk); #1;
      if (h.size() >= LAT*TO) begin
        vec_t x;
        for (int o = 0; o < TO; o++) x[o] = h.pop_front();
        for (int o = 0; o < TO; o++) begin
          checks++;
          if (int'(psum[o]) != x[o]) begin failures++; $display("ch %0d got %0d exp %0d", o, psum[o], x[o]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
