// Testbench of adder_tree: random signed inputs every cycle into a 5-input and a
// 16-input tree; each sum is compared with a software sum after the tree latency
// (clog2(N) cycles: 3 and 4).
module tb_adder_tree;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [7:0] a [5];
  logic signed [7:0] b [16];
  logic signed [10:0] sa;
  logic signed [11:0] sb;
  adder_tree #(.N(5), .IW(8)) u_a (.clk(clk), .in(a), .sum(sa));
  adder_tree #(.N(16), .IW(8)) u_b (.clk(clk), .in(b), .sum(sb));

  int ha [$], hb [$];
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int c = 0; c < 200; c++) begin
      int s1, s2;
      @(negedge clk);
      s1 = 0; s2 = 0;
      for (int i = 0; i < 5; i++) begin a[i] = 8'($urandom_range(0, 255)); s1 += a[i]; end
      for (int i = 0; i < 16; i++) begin
        b[i] = (c % 7 == 0) ? -8'sd128 : 8'($urandom_range(0, 255)); s2 += b[i];
      end
      ha.push_back(s1); hb.push_back(s2);
      @(posedge clk); #1;
      if (ha.size() >= 3) begin
        int e;
        e = ha.pop_front();
        checks++;
        if (int'(sa) != e) begin failures++; $display("N=5: got %0d exp %0d", sa, e); end
      end
      if (hb.size() >= 4) begin
        int e;
        e = hb.pop_front();
        checks++;
        if (int'(sb) != e) begin failures++; $display("N=16: got %0d exp %0d", sb, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
