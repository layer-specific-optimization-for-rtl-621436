// Testbench of data_dispatcher, in both buffer layouts: a frame-buffer instance
// (whole 5x5 map, 2 channel tiles) and a row-buffer instance (ring of 4 rows).
// Random output positions, tiles and 1x1/3x3 modes are issued every cycle; the
// buffers are modelled in the testbench with the 1-cycle read latency of a block
// RAM, and each window is compared with the zero-padded 3x3 neighbourhood of a
// reference image one cycle after issue (the dispatcher's rate is one window per
// cycle).
module tb_data_dispatcher;
  localparam int TI = 2, K = 3, KK = 9, H = 5, NT = 2, ROWS = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  function automatic logic [7:0] pix(int t, int y, int x, int i);
    return 8'((t * 37 + y * 11 + x * 5 + i * 3 + 1) * 7);
  endfunction

  logic valid, k1;
  logic [15:0] y, x, tile, slot_y;
  logic [5:0] fa [KK], ra [KK];
  logic [TI*8-1:0] fd [KK], rd [KK];
  logic signed [7:0] fwin [TI*KK], rwin [TI*KK];
  data_dispatcher #(.TI(TI), .K(K), .ROWS(0), .DEPTH(NT*H*H)) u_frame (
    .clk(clk), .valid(valid), .y(y), .x(x), .tile(tile), .slot_y(16'd0), .h(16'(H)), .k1(k1),
    .raddr(fa), .rdata(fd), .win(fwin));
  data_dispatcher #(.TI(TI), .K(K), .ROWS(ROWS), .DEPTH(NT*ROWS*H)) u_ring (
    .clk(clk), .valid(valid), .y(y), .x(x), .tile(tile), .slot_y(slot_y), .h(16'(H)), .k1(k1),
    .raddr(ra), .rdata(rd), .win(rwin));

  logic [TI*8-1:0] fmem [NT*H*H], rmem [NT*ROWS*H];
  always_ff @(posedge clk)
    for (int k = 0; k < KK; k++) begin
      fd[k] <= fmem[fa[k]];
      rd[k] <= rmem[ra[k]];
    end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int ey [$], ex [$], et [$], ek [$], ev [$];
    for (int t = 0; t < NT; t++)
      for (int yy = 0; yy < H; yy++)
        for (int xx = 0; xx < H; xx++)
          for (int i = 0; i < TI; i++) fmem[(t*H + yy)*H + xx][i*8 +: 8] = pix(t, yy, xx, i);
    valid = 0; k1 = 0; y = 0; x = 0; tile = 0; slot_y = 0;
    for (int c = 0; c < 400; c++) begin
      @(negedge clk);
      if (ey.size() > 0) begin
        int py, px, pt, pk, pv;
        py = ey.pop_front(); px = ex.pop_front(); pt = et.pop_front();
        pk = ek.pop_front(); pv = ev.pop_front();
        for (int i = 0; i < TI; i++)
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++) begin
              int yy, xx;
              logic signed [7:0] e;
              yy = py + ky - 1; xx = px + kx - 1;
              e = (pv && yy >= 0 && yy < H && xx >= 0 && xx < H && (!pk || (ky == 1 && kx == 1)))
                  ? pix(pt, yy, xx, i) : 8'sd0;
              checks += 2;
              if (fwin[i*KK + ky*K + kx] != e) begin
                failures++; $display("frame (%0d,%0d) t%0d lane %0d tap %0d: %0d exp %0d", py, px, pt, i, ky*K+kx, fwin[i*KK+ky*K+kx], e);
              end
              if (rwin[i*KK + ky*K + kx] != e) begin
                failures++; $display("ring (%0d,%0d) t%0d lane %0d tap %0d: %0d exp %0d", py, px, pt, i, ky*K+kx, rwin[i*KK+ky*K+kx], e);
              end
            end
      end
      valid = ($urandom_range(0, 5) != 0);
      y = 16'($urandom_range(0, H-1)); x = 16'($urandom_range(0, H-1));
      tile = 16'($urandom_range(0, NT-1)); k1 = ($urandom_range(0, 3) == 0);
      // the ring holds rows y-1..y+1 of every tile, row r in slot (r + c) mod ROWS
      slot_y = 16'((int'(y) + c) % ROWS);
      for (int t = 0; t < NT; t++)
        for (int d = -1; d <= 1; d++)
          if (int'(y) + d >= 0 && int'(y) + d < H)
            for (int xx = 0; xx < H; xx++)
              for (int i = 0; i < TI; i++)
                rmem[(t*ROWS + (int'(y) + d + c) % ROWS)*H + xx][i*8 +: 8] = pix(t, int'(y) + d, xx, i);
      ey.push_back(int'(y)); ex.push_back(int'(x)); et.push_back(int'(tile));
      ek.push_back(int'(k1)); ev.push_back(int'(valid));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
