// Testbench of pipelined_layer (Scheme 3 row-based weight reuse).
// Two small layers are simulated on the same random frames:
//  * u_fast: wide parameter words and no backpressure. Checks the outputs and that,
//    once started, the layer issues one window per cycle without a bubble across
//    row passes, output rows and frames (the paper's fully pipelined layer).
//  * u_slow: narrow parameter words (weight prefetch stalls) and random out_ready
//    and input gaps (output-room stalls). Checks the outputs.
// Expected values come from the software model in tb_conv_pkg.
module tb_pipelined_layer;
  import tb_conv_pkg::*;

  localparam int N = 16, M = 16, T = 8, K = 3, H = 6, NM = 6, TS = 3;
  localparam int FRAMES = 2;
  localparam int NT = N / T, MT = M / T;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  layer_model lm;
  int act [FRAMES][];
  int expv[FRAMES][];

  // ---------------- two DUTs ----------------
  logic          cfg_we_a, cfg_we_b;
  logic [1:0]    cfg_sel;
  logic [19:0]   cfg_addr;
  logic [255:0]  cfg_data;

  logic          a_in_valid, a_in_ready, a_out_valid, a_out_ready;
  logic [T*8-1:0] a_in_data, a_out_data;
  logic          b_in_valid, b_in_ready, b_out_valid, b_out_ready;
  logic [T*8-1:0] b_in_data, b_out_data;
  logic [31:0]   a_ws, a_os, a_rows, b_ws, b_os, b_rows;

  pipelined_layer #(.N(N), .M(M), .TI(T), .TO(T), .K(K), .H(H), .NM(NM), .TS(TS), .PW(256)) u_fast (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we_a), .cfg_sel(cfg_sel), .cfg_addr(cfg_addr),
    .cfg_data(cfg_data), .in_valid(a_in_valid), .in_data(a_in_data), .in_ready(a_in_ready),
    .out_valid(a_out_valid), .out_data(a_out_data), .out_ready(a_out_ready),
    .stat_wstall(a_ws), .stat_ostall(a_os), .stat_rows(a_rows));

  pipelined_layer #(.N(N), .M(M), .TI(T), .TO(T), .K(K), .H(H), .NM(NM), .TS(TS), .PW(64)) u_slow (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we_b), .cfg_sel(cfg_sel), .cfg_addr(cfg_addr),
    .cfg_data(cfg_data[63:0]), .in_valid(b_in_valid), .in_data(b_in_data), .in_ready(b_in_ready),
    .out_valid(b_out_valid), .out_data(b_out_data), .out_ready(b_out_ready),
    .stat_wstall(b_ws), .stat_ostall(b_os), .stat_rows(b_rows));

  task automatic configure(input int which, input int pw);
    pword_t q[$];
    layer_model m2;
    lm.PW = pw;
    lm.encode(q);
    @(negedge clk);
    for (int i = 0; i < q.size(); i++) begin
      cfg_sel = 0; cfg_addr = 20'(i); cfg_data = q[i];
      if (which == 0) cfg_we_a = 1; else cfg_we_b = 1;
      @(negedge clk);
    end
    for (int o = 0; o < M; o++) begin
      cfg_sel = 1; cfg_addr = 20'(o);
      cfg_data = '0; cfg_data[15:0] = 16'(lm.scale[o]); cfg_data[31:16] = 16'(lm.bias[o]);
      @(negedge clk);
    end
    cfg_sel = 2; cfg_data = '0;
    cfg_data[19:0] = 20'(q.size()); cfg_data[23:20] = 4'(lm.mean_shift);
    cfg_data[29:24] = 6'(lm.bn_shift); cfg_data[30] = 1'b1;
    @(negedge clk);
    cfg_we_a = 0; cfg_we_b = 0;
  endtask

  function automatic logic [T*8-1:0] in_word(int f, int idx);
    // idx counts words in (row, tile, x) order
    int y, t, x;
    logic [T*8-1:0] w;
    y = idx / (NT * H); t = (idx / H) % NT; x = idx % H;
    for (int l = 0; l < T; l++) w[l*8 +: 8] = 8'(act[f][(y*H + x)*N + t*T + l]);
    return w;
  endfunction

  function automatic logic [T*8-1:0] exp_word(int f, int idx);
    int y, t, x;
    logic [T*8-1:0] w;
    y = idx / (MT * H); t = (idx / H) % MT; x = idx % H;
    for (int l = 0; l < T; l++) w[l*8 +: 8] = 8'(expv[f][(y*H + x)*M + t*T + l]);
    return w;
  endfunction

  localparam int WPF = H * NT * H;   // input words per frame
  localparam int OPF = H * MT * H;   // output words per frame

  // ---------------- stimulus ----------------
  int a_in_i = 0, b_in_i = 0, a_out_i = 0, b_out_i = 0;
  // data for the current word index, refreshed every half cycle
  always @(negedge clk) begin
    a_in_valid = run && a_in_i < FRAMES * WPF;
    a_in_data  = (a_in_i < FRAMES * WPF) ? in_word(a_in_i / WPF, a_in_i % WPF) : '0;
    b_in_data  = (b_in_i < FRAMES * WPF) ? in_word(b_in_i / WPF, b_in_i % WPF) : '0;
  end
  assign a_out_ready = 1'b1;
  logic run = 0;
  always_ff @(posedge clk) begin
    if (run) begin
      if (a_in_valid && a_in_ready) a_in_i <= a_in_i + 1;
      if (b_in_valid && b_in_ready) b_in_i <= b_in_i + 1;
      b_in_valid  <= (b_in_i + ((b_in_valid && b_in_ready) ? 1 : 0) < FRAMES * WPF)
                     && ($urandom_range(0, 3) != 0);
      b_out_ready <= $urandom_range(0, 5) == 0;
    end
  end

  // ---------------- checking ----------------
  always_ff @(posedge clk) begin
    if (rst_n && a_out_valid && a_out_ready) begin
      checks++;
      if (a_out_data !== exp_word(a_out_i / OPF, a_out_i % OPF)) begin
        failures++;
        if (failures < 10) $display("fast: word %0d got %h exp %h", a_out_i, a_out_data,
                                    exp_word(a_out_i / OPF, a_out_i % OPF));
      end
      a_out_i <= a_out_i + 1;
    end
    if (rst_n && b_out_valid && b_out_ready) begin
      checks++;
      if (b_out_data !== exp_word(b_out_i / OPF, b_out_i % OPF)) begin
        failures++;
        if (failures < 10) $display("slow: word %0d got %h", b_out_i, b_out_data);
      end
      b_out_i <= b_out_i + 1;
    end
  end

  // issue-rate measurement on u_fast
  int first_issue = -1, last_issue = -1, issued = 0, cyc = 0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && u_fast.active) begin
      if (first_issue < 0) first_issue <= cyc;
      last_issue <= cyc;
      issued <= issued + 1;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog: a_out=%0d b_out=%0d", a_out_i, b_out_i);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we_a = 0; cfg_we_b = 0; cfg_sel = 0; cfg_addr = 0; cfg_data = 0;
    b_in_valid = 0; b_out_ready = 0;
    lm = new(N, M, T, T, K, H, NM, TS, 256);
    for (int f = 0; f < FRAMES; f++) begin
      act[f] = new[H * H * N];
      foreach (act[f][j]) act[f][j] = $urandom_range(0, 255) - 128;
      lm.compute(act[f], expv[f]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    configure(0, 256);
    configure(1, 64);
    run = 1;
    wait (a_out_i == FRAMES * OPF && b_out_i == FRAMES * OPF);
    repeat (5) @(posedge clk);
    // rate: every window issued back to back once the first one started
    checks++;
    if (issued != FRAMES * H * H * NT * MT || last_issue - first_issue + 1 != issued) begin
      failures++;
      $display("rate: issued %0d windows over %0d cycles", issued, last_issue - first_issue + 1);
    end
    checks++;
    if (a_ws != 0) begin failures++; $display("fast layer stalled on weights"); end
    checks++;
    if (b_ws == 0 || b_os == 0) begin
      failures++; $display("slow layer: weight stalls %0d, output stalls %0d", b_ws, b_os);
    end
    checks++;
    if (a_rows != FRAMES * H || b_rows != FRAMES * H) begin failures++; $display("row count"); end
    $display("fast: %0d windows in %0d cycles; slow: %0d weight-stall, %0d output-stall cycles",
             issued, last_issue - first_issue + 1, b_ws, b_os);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
