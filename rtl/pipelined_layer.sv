// One layer of the pipelined first group (row-based weight reuse, "Scheme 3").
//
// Input activations stream in pixel by pixel in the order (row, channel tile,
// column), TI channels per word, and are written into a row buffer that holds K+1
// rows of all N input channels. As soon as the rows a window needs are present the
// layer computes one output row: for each tile of TO output channels (mt) and each
// tile of TI input channels (nt) it takes the next weight block and slides the
// K x K x TI cube along the row (a "row pass", one window per cycle), accumulating
// the TO partial sums of the row in the output buffer. After the last input tile the
// row of TO channels is batch-normalised, quantised and sent out, in the same
// (row, tile, column) order, to the next layer. The weight blocks of a row are read
// once per output row from the layer's on-chip parameter memory (the paper keeps the
// first group's dense and sparse parameters in BRAM) through the two-bank
// prefetcher, so weights are read H times per frame.
//
// Flow control: in_ready drops when writing the next row would overwrite a row still
// needed (the writer may run at most P+1 rows ahead of the row being computed). A
// pass that produces outputs starts only when the output FIFO has room for a whole
// row (out_ready backpressure), and a pass waits for its weight block (prefetch
// stall). Passes follow each other without a gap, so a layer sustains one window per
// cycle. stat_* counters report how many cycles each stall held the layer.
//
// Configuration port (cfg_sel): 0 = parameter memory word at cfg_addr,
// 1 = batch-norm entry of output channel cfg_addr ({bias[31:16], scale[15:0]}),
// 2 = control {enable[30], bn_shift[29:24], mean_shift[23:20], param_len[19:0]}
// with param_len the number of parameter words of the whole layer.
module pipelined_layer
  import mp_pkg::*;
#(
  parameter int unsigned N   = 256,
  parameter int unsigned M   = 512,
  parameter int unsigned TI  = 16,
  parameter int unsigned TO  = 16,
  parameter int unsigned K   = 3,
  parameter int unsigned H   = 26,
  parameter int unsigned NM  = 27,
  parameter int unsigned TS  = 8,
  parameter int unsigned PW  = 256,
  localparam int unsigned KK     = K * K,
  localparam int unsigned NT     = N / TI,
  localparam int unsigned MT     = M / TO,
  localparam int unsigned P      = (K - 1) / 2,
  localparam int unsigned ROWS   = K + 1,
  localparam int unsigned RDEPTH = NT * ROWS * H,
  localparam int unsigned EW     = entry_w(TI, TO, KK),
  localparam int unsigned DWN    = (TO * TI * KK + PW - 1) / PW,
  localparam int unsigned EPW    = PW / EW,
  localparam int unsigned REC    = 1 + DWN + (NM + EPW - 1) / EPW,
  localparam int unsigned PDEPTH = NT * MT * REC,
  localparam int unsigned FD     = 2 * H + 32  // two rows plus the datapath latency
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration
  input  logic             cfg_we,
  input  logic [1:0]       cfg_sel,
  input  logic [19:0]      cfg_addr,
  input  logic [PW-1:0]    cfg_data,
  // input activations
  input  logic             in_valid,
  input  logic [TI*QA-1:0] in_data,
  output logic             in_ready,
  // output activations
  output logic             out_valid,
  output logic [TO*QA-1:0] out_data,
  input  logic             out_ready,
  // activity counters
  output logic [31:0]      stat_wstall,    // cycles a ready pass waited for weights
  output logic [31:0]      stat_ostall,    // cycles a ready pass waited for output room
  output logic [31:0]      stat_rows       // output rows completed
);
  // ---------------- configuration ----------------
  logic [PW-1:0]           pmem [PDEPTH];
  logic signed [BN_SW-1:0] bn_s [M];
  logic signed [BN_BW-1:0] bn_b [M];
  logic [19:0]             param_len;
  logic [3:0]              mean_shift;
  logic [5:0]              bn_shift;
  logic                    enable;

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == 2'd0) pmem[cfg_addr] <= cfg_data;
    if (cfg_we && cfg_sel == 2'd1) begin
      bn_s[cfg_addr] <= cfg_data[15:0];
      bn_b[cfg_addr] <= cfg_data[31:16];
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      param_len  <= '0;
      mean_shift <= '0;
      bn_shift   <= '0;
      enable     <= 1'b0;
    end else if (cfg_we && cfg_sel == 2'd2) begin
      param_len  <= cfg_data[19:0];
      mean_shift <= cfg_data[23:20];
      bn_shift   <= cfg_data[29:24];
      enable     <= cfg_data[30];
    end
  end

  // ---------------- parameter replay into the prefetcher ----------------
  logic [19:0] pptr;
  logic        p_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pptr <= '0;
    else if (enable && p_ready) pptr <= (pptr == param_len - 1) ? '0 : pptr + 1'b1;
  end

  logic [1:0]              bank_valid;
  logic                    rel_valid, rel_bank, cur_bank;
  logic [TO*TI*KK-1:0]     w_dense;
  logic [CNT_W-1:0]        w_cnt;
  logic [idx_w(TO)-1:0]    e_oc [NM];
  logic [idx_w(TI)-1:0]    e_ic [NM];
  logic [idx_w(KK)-1:0]    e_xy [NM];
  logic signed [QW-1:0]    e_w  [NM];

  weight_prefetch #(.TI(TI), .TO(TO), .KK(KK), .NM(NM), .PW(PW)) u_pref (
    .clk(clk), .rst_n(rst_n), .p_valid(enable), .p_data(pmem[pptr]), .p_ready(p_ready),
    .bank_valid(bank_valid), .release_valid(rel_valid), .release_bank(rel_bank),
    .rd_bank(cur_bank), .dense(w_dense), .cnt(w_cnt), .e_oc(e_oc), .e_ic(e_ic),
    .e_xy(e_xy), .e_w(e_w));

  // ---------------- row buffer writer ----------------
  logic [15:0] wx, wt, wslot;
  logic [31:0] w_rows;          // rows completely written since reset
  logic [31:0] r_g;             // output rows completed since reset
  logic        wr;

  assign in_ready = enable && (w_rows < r_g + P + 2);
  assign wr       = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wx <= '0; wt <= '0; wslot <= '0; w_rows <= '0;
    end else if (wr) begin
      if (wx == H - 1) begin
        wx <= '0;
        if (wt == NT - 1) begin
          wt     <= '0;
          wslot  <= (wslot == ROWS - 1) ? '0 : wslot + 1'b1;
          w_rows <= w_rows + 1;
        end else wt <= wt + 1'b1;
      end else wx <= wx + 1'b1;
    end
  end

  logic [idx_w(RDEPTH)-1:0] raddr [KK];
  logic [TI*QA-1:0]         rdata [KK];
  frame_buffer #(.WW(TI*QA), .DEPTH(RDEPTH), .NR(KK)) u_rowbuf (
    .clk(clk), .we(wr), .waddr(idx_w(RDEPTH)'((32'(wt) * ROWS + 32'(wslot)) * H + 32'(wx))),
    .wdata(in_data), .raddr(raddr), .rdata(rdata));

  // ---------------- pass sequencer ----------------
  logic [15:0] r, rslot, mt, nt, x;
  logic        active, pbank;
  logic [31:0] reserved;                 // output FIFO entries promised to passes
  logic [15:0] n_r, n_rslot, n_mt, n_nt;
  logic [31:0] n_rg;
  logic        ready_cur, ready_next, pop;

  function automatic logic pass_ready(input logic [15:0] pr, input logic [31:0] prg,
                                      input logic [15:0] pnt, input logic pb,
                                      input logic [31:0] res);
    int unsigned need;
    need = ((int'(pr) + P < H) ? int'(pr) + P : H - 1) + 1;   // rows of this frame needed
    return enable && (w_rows >= prg - 32'(pr) + need) && bank_valid[pb]
           && (pnt != NT - 1 || FD - res >= H);
  endfunction

  always_comb begin
    n_r = r; n_rslot = rslot; n_mt = mt; n_nt = nt; n_rg = r_g;
    if (nt == NT - 1) begin
      n_nt = '0;
      if (mt == MT - 1) begin
        n_mt    = '0;
        n_r     = (r == H - 1) ? '0 : r + 1'b1;
        n_rslot = (rslot == ROWS - 1) ? '0 : rslot + 1'b1;
        n_rg    = r_g + 1;
      end else n_mt = mt + 1'b1;
    end else n_nt = nt + 1'b1;
  end

  assign pop        = out_valid && out_ready;
  assign ready_cur  = pass_ready(r, r_g, nt, pbank, reserved);
  assign ready_next = pass_ready(n_r, n_rg, n_nt, ~pbank,
                                 reserved + ((nt == NT - 1) ? 32'(H) : 0) - 32'(pop));

  logic start_cur, chain;
  assign start_cur = !active && ready_cur;
  assign chain     = active && x == H - 1 && ready_next;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; rslot <= '0; mt <= '0; nt <= '0; x <= '0; r_g <= '0;
      active <= 1'b0; pbank <= 1'b0; reserved <= '0;
      stat_wstall <= '0; stat_ostall <= '0; stat_rows <= '0;
    end else begin
      reserved <= reserved - 32'(pop)
                + ((start_cur && nt == NT - 1) || (chain && n_nt == NT - 1) ? 32'(H) : 32'd0);
      if (!active) begin
        if (ready_cur) begin
          active <= 1'b1;
          x      <= '0;
        end else if (enable && w_rows >= r_g - 32'(r) + 32'(((int'(r) + P < H) ? int'(r) + P : H - 1) + 1)) begin
          if (!bank_valid[pbank]) stat_wstall <= stat_wstall + 1;
          else                    stat_ostall <= stat_ostall + 1;
        end
      end else if (x == H - 1) begin
        r <= n_r; rslot <= n_rslot; mt <= n_mt; nt <= n_nt; r_g <= n_rg;
        pbank  <= ~pbank;
        active <= ready_next;
        x      <= '0;
        if (n_rg != r_g) stat_rows <= stat_rows + 1;
      end else begin
        x <= x + 1'b1;
      end
    end
  end

  // dispatcher: issue at cycle c, window at c+1
  logic signed [QA-1:0] win [TI*KK];
  data_dispatcher #(.TI(TI), .K(K), .ROWS(ROWS), .DEPTH(RDEPTH)) u_disp (
    .clk(clk), .valid(active), .y(r), .x(x), .tile(nt), .slot_y(rslot), .h(16'(H)),
    .k1(1'b0), .raddr(raddr), .rdata(rdata), .win(win));

  localparam int unsigned TAGW = idx_w(MT);
  logic                   d_valid, d_first, d_last;
  logic [idx_w(H)-1:0]    d_addr;
  logic [TAGW-1:0]        d_tag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= 1'b0; d_first <= 1'b0; d_last <= 1'b0;
      d_addr <= '0; d_tag <= '0; cur_bank <= 1'b0;
    end else begin
      d_valid  <= active;
      d_first  <= (nt == 0);
      d_last   <= (nt == NT - 1);
      d_addr   <= idx_w(H)'(x);
      d_tag    <= TAGW'(mt);
      cur_bank <= pbank;
    end
  end
  // A bank is released in the cycle its last window is issued: the window reads the
  // bank one cycle later, before the refill can have changed it.
  assign rel_valid = active && x == H - 1;
  assign rel_bank  = pbank;

  // ---------------- datapath ----------------
  logic [TAGW-1:0]         bn_tag, o_tag;
  logic signed [BN_SW-1:0] s_sel [TO];
  logic signed [BN_BW-1:0] b_sel [TO];
  logic                    o_valid;
  logic signed [QA-1:0]    o_q [TO];
  always_comb begin
    for (int o = 0; o < TO; o++) begin
      s_sel[o] = bn_s[int'(bn_tag) * TO + o];
      b_sel[o] = bn_b[int'(bn_tag) * TO + o];
    end
  end

  conv_core #(.TI(TI), .TO(TO), .K(K), .NM(NM), .TS(TS), .PDEPTH(H), .TAGW(TAGW)) u_core (
    .clk(clk), .rst_n(rst_n), .in_valid(d_valid), .win(win), .paddr(d_addr),
    .first(d_first), .last(d_last), .tag_in(d_tag), .dense(w_dense), .cnt(w_cnt),
    .e_oc(e_oc), .e_ic(e_ic), .e_xy(e_xy), .e_w(e_w), .mean_shift(mean_shift),
    .bn_tag(bn_tag), .bn_scale(s_sel), .bn_bias(b_sel), .bn_shift(bn_shift),
    .out_valid(o_valid), .out_q(o_q), .out_tag(o_tag));

  // ---------------- output FIFO ----------------
  logic [TO*QA-1:0]      fifo [FD];
  logic [idx_w(FD)-1:0]  f_wp, f_rp;
  logic [idx_w(FD+1)-1:0] f_cnt;
  logic [TO*QA-1:0]      o_word;
  always_comb for (int o = 0; o < TO; o++) o_word[o*QA +: QA] = o_q[o];

  always_ff @(posedge clk) if (o_valid) fifo[f_wp] <= o_word;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_wp <= '0; f_rp <= '0; f_cnt <= '0;
    end else begin
      if (o_valid) f_wp <= (int'(f_wp) == FD - 1) ? '0 : f_wp + 1'b1;
      if (pop)     f_rp <= (int'(f_rp) == FD - 1) ? '0 : f_rp + 1'b1;
      f_cnt <= f_cnt + (o_valid ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end
  assign out_valid = f_cnt != 0;
  assign out_data  = fifo[f_rp];

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(o_valid && int'(f_cnt) == FD && !pop))
    else $error("pipelined_layer: output FIFO overflow");
endmodule
