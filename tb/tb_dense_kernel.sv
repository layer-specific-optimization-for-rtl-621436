// Testbench of dense_kernel: random windows and 1-bit weights every cycle; the
// output must equal sum(wbit ? +a : -a) over all taps, 1 + clog2(TI*KK) cycles later.
module tb_dense_kernel;
  localparam int TI = 2, KK = 9, NT = TI * KK, LAT = 1 + $clog2(NT);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [7:0] act [NT];
  logic [NT-1:0] wbit;
  logic signed [8+$clog2(NT):0] sum;
  dense_kernel #(.TI(TI), .KK(KK)) dut (.clk(clk), .act(act), .wbit(wbit), .sum(sum));

  int h [$];
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int c = 0; c < 300; c++) begin
      int s;
      @(negedge clk);
      s = 0;
      for (int i = 0; i < NT; i++) begin
        act[i]  = (c % 5 == 0) ? -8'sd128 : 8'($urandom_range(0, 255));
        wbit[i] = 1'($urandom_range(0, 1));
        s += wbit[i] ? int'(act[i]) : -int'(act[i]);
      end
      h.push_back(s);
      @(posedge clk); #1;
      if (h.size() >= LAT) begin
        int e;
        e = h.pop_front();
        checks++;
        if (int'(sum) != e) begin failures++; $display("got %0d exp %0d", sum, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
