// Testbench of eltwise_add: random lane pairs, including saturating sums; every
// lane must equal sat8(a + b).
module tb_eltwise_add;
  int checks = 0, failures = 0;
  logic [31:0] a, b, y;
  eltwise_add #(.L(4)) dut (.a(a), .b(b), .y(y));
  initial begin
    for (int c = 0; c < 500; c++) begin
      a = $urandom; b = $urandom;
      if (c < 4) begin a = 32'h7f7f8080; b = 32'h017f80ff; end
      #1;
      for (int l = 0; l < 4; l++) begin
        int s;
        s = int'($signed(a[l*8 +: 8])) + int'($signed(b[l*8 +: 8]));
        s = (s > 127) ? 127 : (s < -128) ? -128 : s;
        checks++;
        if (int'($signed(y[l*8 +: 8])) != s) begin failures++; $display("got %0d exp %0d", $signed(y[l*8 +: 8]), s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
