// Testbench of batch_norm: random accumulators, scales, biases and shifts (with
// values that saturate both ways); each output must equal
// sat8(((acc*scale) >>> shift) + bias), two cycles after the input.
module tb_batch_norm;
  localparam int TO = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic signed [31:0] acc [TO];
  logic signed [15:0] scale [TO], bias [TO];
  logic [5:0] shift;
  logic signed [7:0] q [TO];
  batch_norm #(.TO(TO), .IW(32)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .acc(acc),
    .scale(scale), .bias(bias), .shift(shift), .out_valid(out_valid), .q(q));

  function automatic int sat8(longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction

  typedef int vec_t [TO];
  int h [$];   // expected values, TO per input, flattened
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    in_valid = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 300; c++) begin
      vec_t e;
      @(negedge clk);
      in_valid = (c % 4 != 1);
      shift = 6'($urandom_range(0, 20));
      for (int o = 0; o < TO; o++) begin
        acc[o]   = 32'($urandom_range(0, 200000)) - 32'd100000;
        scale[o] = 16'($urandom_range(0, 2000)) - 16'd1000;
        bias[o]  = 16'($urandom_range(0, 300)) - 16'd150;
        e[o] = sat8(((longint'(acc[o]) * longint'(scale[o])) >>> shift) + longint'(bias[o]));
      end
      if (in_valid) for (int o = 0; o < TO; o++) h.push_back(e[o]);
      @(posedge clk); #1;
      if (out_valid) begin
        vec_t x;
        checks++;
        if (h.size() == 0) begin failures++; $display("unexpected output"); end
        else begin
          for (int o = 0; o < TO; o++) x[o] = h.pop_front();
          for (int o = 0; o < TO; o++) begin
            checks++;
            if (int'(q[o]) != x[o]) begin failures++; $display("got %0d exp %0d", q[o], x[o]); end
          end
        end
      end
    end
    checks++;
    if (h.size() > 2*TO) begin failures++; $display("%0d outputs missing", h.size()/TO); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
