// Testbench of psum_buffer: random accumulate operations (first / accumulate /
// last) at random addresses against a software copy of the buffer. One cycle after
// every operation with last set, out_valid, the accumulated vector and the tag must
// appear; out_valid must stay low otherwise.
module tb_psum_buffer;
  localparam int TO = 2, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, first, last, out_valid;
  logic [1:0] addr;
  logic [3:0] tag_in, tag_out;
  logic signed [15:0] psum [TO];
  logic signed [31:0] acc [TO];
  psum_buffer #(.TO(TO), .IW(16), .DEPTH(DEPTH), .TAGW(4)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .addr(addr), .first(first), .last(last),
    .tag_in(tag_in), .psum(psum), .out_valid(out_valid), .tag_out(tag_out), .acc(acc));

  int model [DEPTH][TO];
  int exp_v [TO];
  int exp_tag;
  bit exp_out;
  bit touched [DEPTH];   // an address is accumulated only after a first

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    in_valid = 0; first = 0; last = 0; addr = 0; tag_in = 0;
    exp_out = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 400; c++) begin
      @(negedge clk);
      // result of the previous operation
      checks++;
      if (out_valid != exp_out) begin failures++; $display("out_valid %0b exp %0b", out_valid, exp_out); end
      if (exp_out) begin
        for (int o = 0; o < TO; o++) begin
          checks++;
          if (int'(acc[o]) != exp_v[o]) begin failures++; $display("acc %0d exp %0d", acc[o], exp_v[o]); end
        end
        checks++;
        if (int'(tag_out) != exp_tag) begin failures++; $display("tag %0d exp %0d", tag_out, exp_tag); end
      end
      in_valid = ($urandom_range(0, 3) != 0);
      addr   = 2'($urandom_range(0, DEPTH-1));
      first  = ($urandom_range(0, 3) == 0) || !touched[addr];
      if (in_valid) touched[addr] = 1;
      last   = ($urandom_range(0, 2) == 0);
      tag_in = 4'($urandom);
      for (int o = 0; o < TO; o++) psum[o] = 16'($urandom);
      exp_out = in_valid && last;
      if (in_valid) begin
        for (int o = 0; o < TO; o++) begin
          model[addr][o] = (first ? 0 : model[addr][o]) + int'(psum[o]);
          exp_v[o] = model[addr][o];
        end
        exp_tag = tag_in;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
