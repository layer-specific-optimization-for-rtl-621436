// Testbench of frame_buffer: random writes and three random reads per cycle
// against a software copy. Reads return the word one cycle later, and a read of the
// address being written in the same cycle returns the old word.
module tb_frame_buffer;
  localparam int WW = 16, DEPTH = 32, NR = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we;
  logic [4:0] waddr;
  logic [WW-1:0] wdata;
  logic [4:0] raddr [NR];
  logic [WW-1:0] rdata [NR];
  frame_buffer #(.WW(WW), .DEPTH(DEPTH), .NR(NR)) dut (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rdata));

  int model [DEPTH];
  int exp_r [NR];
  bit known [DEPTH];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    bit chk [NR];
    foreach (chk[r]) chk[r] = 0;
    // fill every word once
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 5'(a); wdata = WW'($urandom); model[a] = int'(wdata); known[a] = 1;
      foreach (raddr[r]) raddr[r] = '0;
    end
    for (int c = 0; c < 500; c++) begin
      @(negedge clk);
      for (int r = 0; r < NR; r++) begin
        if (chk[r]) begin
          checks++;
          if (int'(rdata[r]) != exp_r[r]) begin failures++; $display("port %0d got %h exp %h", r, rdata[r], exp_r[r]); end
        end
      end
      for (int r = 0; r < NR; r++) begin
        raddr[r] = 5'($urandom_range(0, DEPTH-1));
        exp_r[r] = model[raddr[r]];
        chk[r] = 1;
      end
      we = ($urandom_range(0, 1) == 1);
      waddr = (c % 5 == 0) ? raddr[0] : 5'($urandom_range(0, DEPTH-1));
      wdata = WW'($urandom);
      if (we) model[waddr] = int'(wdata);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
