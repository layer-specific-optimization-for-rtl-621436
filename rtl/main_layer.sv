// Main layer: runs the second-group layers one after another on a single engine with
// full weight reuse ("Scheme 2").
//
// A frame arrives from the first group (pixel order row, channel tile, column; T
// channels per word) and is written into the frame buffer currently playing the
// "fill" role. When the main layer is idle and a filled frame is waiting, the roles
// rotate: the filled buffer becomes the input (IN) buffer and the buffer IN held
// becomes the new fill buffer, so the first group can stream the next frame while
// this one is processed (the paper's extra input buffer for pipelining the two
// groups). Each layer is described by a descriptor; for each tile of T output
// channels and each tile of T input channels the engine takes one weight block from
// the DRAM parameter stream and sweeps the K x K x T cube over the whole h x h input
// plane (one window per cycle), accumulating the T output planes in the output
// buffer. After the last input tile the outputs are batch-normalised, optionally
// added element-wise to the shortcut buffer, and written to the destination buffer.
// Source and destination are logical buffers (IN, PP, SC) so that consecutive layers
// simply swap IN and PP (the buffers "interchange"), and the shortcut frame buffer
// SC can both keep a layer's output and serve later as a layer's input. The last
// layer writes to the output port (to DRAM) instead. Between layers the engine waits
// until the previous layer's outputs are all written.
//
// Descriptor (cfg_sel 0, one 64-bit word per layer):
//   [6:0] h  [14:7] input tiles  [22:15] output tiles  [23] 1x1 layer
//   [25:24] src (0 IN, 1 PP, 2 SC)  [27:26] dst (0 IN, 1 PP, 2 SC, 3 output port)
//   [28] add shortcut  [32:29] mean_shift  [38:33] bn_shift  [50:39] batch-norm base
//   channel  [51] also copy the output into SC
// cfg_sel 1: batch-norm entry of channel cfg_addr {bias[31:16], scale[15:0]};
// cfg_sel 2: control {layers[4:1], enable[0]}.
// Frame-buffer word address of (tile, row, col) = (tile*h + row)*h + col.
// Layers with stride, pooling or odd channel counts are outside this engine.
module main_layer
  import mp_pkg::*;
#(
  parameter int unsigned T        = 16,
  parameter int unsigned K        = 3,
  parameter int unsigned H_MAX    = 26,
  parameter int unsigned FB_DEPTH = 10816,
  parameter int unsigned NM       = 27,
  parameter int unsigned TS       = 8,
  parameter int unsigned PW       = 64,
  parameter int unsigned MAXL     = 8,
  parameter int unsigned BN_DEPTH = 4096,
  localparam int unsigned KK      = K * K,
  localparam int unsigned PD      = H_MAX * H_MAX,
  localparam int unsigned FAW     = idx_w(FB_DEPTH),
  localparam int unsigned PIXW    = idx_w(PD),
  localparam int unsigned TAGW    = 8 + PIXW
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cfg_we,
  input  logic [1:0]      cfg_sel,
  input  logic [15:0]     cfg_addr,
  input  logic [63:0]     cfg_data,
  // frame from the first group
  input  logic            in_valid,
  input  logic [T*QA-1:0] in_data,
  output logic            in_ready,
  // parameters from DRAM
  input  logic            p_valid,
  input  logic [PW-1:0]   p_data,
  output logic            p_ready,
  // results to DRAM
  output logic            out_valid,
  output logic [T*QA-1:0] out_data,
  output logic [FAW-1:0]  out_addr,
  output logic            frame_done,
  // activity counters
  output logic [31:0]     stat_wstall,   // cycles waiting for a weight block
  output logic [31:0]     stat_fstall,   // cycles the first group was held off
  output logic [31:0]     stat_swaps,    // frame-buffer role rotations
  output logic [31:0]     stat_sc        // vectors written to / added from the shortcut buffer
);
  typedef struct packed {
    logic [11:0] rsv;
    logic        also_sc;
    logic [11:0] bn_base;
    logic [5:0]  bn_shift;
    logic [3:0]  mean_shift;
    logic        add_sc;
    logic [1:0]  dst;
    logic [1:0]  src;
    logic        k1;
    logic [7:0]  mtc;
    logic [7:0]  ntc;
    logic [6:0]  h;
  } desc_t;

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN, S_DRAIN} state_t;

  // ---------------- configuration ----------------
  desc_t                   desc [MAXL];
  logic signed [BN_SW-1:0] bn_s [BN_DEPTH];
  logic signed [BN_BW-1:0] bn_b [BN_DEPTH];
  logic [3:0]              nlayers;
  logic                    enable;

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == 2'd0) desc[cfg_addr[idx_w(MAXL)-1:0]] <= desc_t'(cfg_data);
    if (cfg_we && cfg_sel == 2'd1) begin
      bn_s[cfg_addr[idx_w(BN_DEPTH)-1:0]] <= cfg_data[15:0];
      bn_b[cfg_addr[idx_w(BN_DEPTH)-1:0]] <= cfg_data[31:16];
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nlayers <= '0;
      enable  <= 1'b0;
    end else if (cfg_we && cfg_sel == 2'd2) begin
      enable  <= cfg_data[0];
      nlayers <= cfg_data[4:1];
    end
  end

  // ---------------- frame buffer roles ----------------
  logic [1:0] fill_fb, in_fb, pp_fb;   // physical indices of the three frame buffers
  logic       fill_full;
  function automatic logic [1:0] phys(input logic [1:0] lg);
    case (lg)
      2'd0:    return in_fb;
      2'd1:    return pp_fb;
      default: return 2'd3;           // shortcut frame buffer
    endcase
  endfunction

  // ---------------- input frame writer ----------------
  desc_t       d0;
  logic [15:0] wx, wy, wt;
  logic        fwr;
  assign d0       = desc[0];
  assign in_ready = enable && !fill_full;
  assign fwr      = in_valid && in_ready;
  logic [FAW-1:0] fwaddr;
  assign fwaddr = FAW'((32'(wt) * 32'(d0.h) + 32'(wy)) * 32'(d0.h) + 32'(wx));

  // ---------------- sequencer ----------------
  state_t      state;
  desc_t       d;
  logic [3:0]  l;
  logic [15:0] mt, nt, y, x;
  logic        active, pbank;
  logic [31:0] expected, written;
  logic [1:0]  bank_valid;
  logic        last_px, last_pass;

  assign last_px   = (y == 16'(d.h) - 1) && (x == 16'(d.h) - 1);
  assign last_pass = (mt == 16'(d.mtc) - 1) && (nt == 16'(d.ntc) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; l <= '0; d <= '0;
      mt <= '0; nt <= '0; y <= '0; x <= '0; active <= 1'b0; pbank <= 1'b0;
      expected <= '0;
      fill_fb <= 2'd0; in_fb <= 2'd1; pp_fb <= 2'd2; fill_full <= 1'b0;
      wx <= '0; wy <= '0; wt <= '0;
      frame_done <= 1'b0;
      stat_wstall <= '0; stat_fstall <= '0; stat_swaps <= '0;
    end else begin
      frame_done <= 1'b0;
      if (in_valid && !in_ready) stat_fstall <= stat_fstall + 1;
      // input writer, order (row, tile, column)
      if (fwr) begin
        if (wx == 16'(d0.h) - 1) begin
          wx <= '0;
          if (wt == 16'(d0.ntc) - 1) begin
            wt <= '0;
            if (wy == 16'(d0.h) - 1) begin
              wy        <= '0;
              fill_full <= 1'b1;
            end else wy <= wy + 1'b1;
          end else wt <= wt + 1'b1;
        end else wx <= wx + 1'b1;
      end

      unique case (state)
        S_IDLE: if (enable && fill_full && nlayers != 0) begin
          in_fb      <= fill_fb;
          fill_fb    <= in_fb;
          fill_full  <= 1'b0;
          stat_swaps <= stat_swaps + 1;
          l          <= '0;
          state      <= S_LOAD;
        end
        S_LOAD: begin
          d        <= desc[l];
          expected <= 32'(desc[l].mtc) * 32'(desc[l].h) * 32'(desc[l].h);
          mt <= '0; nt <= '0; y <= '0; x <= '0;
          state    <= S_RUN;
        end
        S_RUN: begin
          if (!active) begin
            if (bank_valid[pbank]) active <= 1'b1;
            else stat_wstall <= stat_wstall + 1;
          end else if (last_px) begin
            x <= '0; y <= '0; pbank <= ~pbank;
            if (last_pass) begin
              active <= 1'b0;
              state  <= S_DRAIN;
            end else begin
              active <= bank_valid[~pbank];
              if (nt == 16'(d.ntc) - 1) begin
                nt <= '0;
                mt <= mt + 1'b1;
              end else nt <= nt + 1'b1;
            end
          end else if (x == 16'(d.h) - 1) begin
            x <= '0;
            y <= y + 1'b1;
          end else x <= x + 1'b1;
        end
        S_DRAIN: if (written == expected) begin
          if (l == nlayers - 1) begin
            frame_done <= 1'b1;
            state      <= S_IDLE;
          end else begin
            l     <= l + 1'b1;
            state <= S_LOAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- weights ----------------
  logic                 rel_valid, cur_bank;
  logic [T*T*KK-1:0]    w_dense;
  logic [CNT_W-1:0]     w_cnt;
  logic [idx_w(T)-1:0]  e_oc [NM];
  logic [idx_w(T)-1:0]  e_ic [NM];
  logic [idx_w(KK)-1:0] e_xy [NM];
  logic signed [QW-1:0] e_w  [NM];
  weight_prefetch #(.TI(T), .TO(T), .KK(KK), .NM(NM), .PW(PW)) u_pref (
    .clk(clk), .rst_n(rst_n), .p_valid(p_valid), .p_data(p_data), .p_ready(p_ready),
    .bank_valid(bank_valid), .release_valid(rel_valid), .release_bank(cur_bank),
    .rd_bank(cur_bank), .dense(w_dense), .cnt(w_cnt), .e_oc(e_oc), .e_ic(e_ic),
    .e_xy(e_xy), .e_w(e_w));

  // ---------------- frame buffers ----------------
  logic [FAW-1:0]  raddr [KK+1];
  logic [T*QA-1:0] rdata [4][KK+1];
  logic [FAW-1:0]  disp_addr [KK];
  logic            fb_we [4];
  logic [FAW-1:0]  fb_wa [4];
  logic [T*QA-1:0] fb_wd [4];
  logic            mw;                      // main-layer result write
  logic [FAW-1:0]  mw_addr;
  logic [T*QA-1:0] mw_data;
  logic [1:0]      dst_p;
  assign dst_p = phys(d.dst);

  always_comb begin
    for (int b = 0; b < 4; b++) begin
      fb_we[b] = 1'b0;
      fb_wa[b] = mw_addr;
      fb_wd[b] = mw_data;
      if (mw && d.dst != 2'd3 && int'(dst_p) == b) fb_we[b] = 1'b1;
      if (mw && d.also_sc && b == 3) fb_we[b] = 1'b1;
      if (fwr && int'(fill_fb) == b) begin
        fb_we[b] = 1'b1;
        fb_wa[b] = fwaddr;
        fb_wd[b] = in_data;
      end
    end
  end

  for (genvar b = 0; b < 4; b++) begin : g_fb
    frame_buffer #(.WW(T*QA), .DEPTH(FB_DEPTH), .NR(KK+1)) u_fb (
      .clk(clk), .we(fb_we[b]), .waddr(fb_wa[b]), .wdata(fb_wd[b]), .raddr(raddr),
      .rdata(rdata[b]));
  end

  // ---------------- dispatcher ----------------
  logic signed [QA-1:0] win [T*KK];
  logic [1:0]           src_p;
  logic [T*QA-1:0]      src_data [KK];
  always_ff @(posedge clk) src_p <= phys(d.src);
  always_comb for (int k = 0; k < KK; k++) src_data[k] = rdata[src_p][k];

  data_dispatcher #(.TI(T), .K(K), .ROWS(0), .DEPTH(FB_DEPTH)) u_disp (
    .clk(clk), .valid(state == S_RUN && active), .y(y), .x(x), .tile(nt), .slot_y('0),
    .h(16'(d.h)), .k1(d.k1), .raddr(disp_addr), .rdata(src_data), .win(win));

  logic                 q_valid, q_first, q_last, q_end;
  logic [PIXW-1:0]      q_pix;
  logic [7:0]           q_mt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_valid <= 1'b0; q_first <= 1'b0; q_last <= 1'b0; q_end <= 1'b0;
      q_pix <= '0; q_mt <= '0; cur_bank <= 1'b0;
    end else begin
      q_valid  <= state == S_RUN && active;
      q_first  <= nt == 0;
      q_last   <= nt == 16'(d.ntc) - 1;
      q_end    <= state == S_RUN && active && last_px;
      q_pix    <= PIXW'(32'(y) * 32'(d.h) + 32'(x));
      q_mt     <= 8'(mt);
      cur_bank <= pbank;
    end
  end
  assign rel_valid = q_end;

  // ---------------- datapath ----------------
  logic [TAGW-1:0]         bn_tag, o_tag;
  logic signed [BN_SW-1:0] s_sel [T];
  logic signed [BN_BW-1:0] b_sel [T];
  logic                    o_valid;
  logic signed [QA-1:0]    o_q [T];
  always_comb begin
    for (int o = 0; o < T; o++) begin
      s_sel[o] = bn_s[idx_w(BN_DEPTH)'(int'(d.bn_base) + int'(bn_tag[TAGW-1 -: 8]) * T + o)];
      b_sel[o] = bn_b[idx_w(BN_DEPTH)'(int'(d.bn_base) + int'(bn_tag[TAGW-1 -: 8]) * T + o)];
    end
  end

  conv_core #(.TI(T), .TO(T), .K(K), .NM(NM), .TS(TS), .PDEPTH(PD), .TAGW(TAGW)) u_core (
    .clk(clk), .rst_n(rst_n), .in_valid(q_valid), .win(win), .paddr(q_pix),
    .first(q_first), .last(q_last), .tag_in({q_mt, q_pix}), .dense(w_dense), .cnt(w_cnt),
    .e_oc(e_oc), .e_ic(e_ic), .e_xy(e_xy), .e_w(e_w), .mean_shift(d.mean_shift),
    .bn_tag(bn_tag), .bn_scale(s_sel), .bn_bias(b_sel), .bn_shift(d.bn_shift),
    .out_valid(o_valid), .out_q(o_q), .out_tag(o_tag));

  // ---------------- shortcut add and write-back ----------------
  logic [FAW-1:0]  o_addr;
  logic [T*QA-1:0] o_word, r_word, sum_word;
  logic            r_valid;
  logic [FAW-1:0]  r_addr;
  assign o_addr = FAW'(32'(o_tag[TAGW-1 -: 8]) * 32'(d.h) * 32'(d.h) + 32'(o_tag[PIXW-1:0]));
  always_comb for (int o = 0; o < T; o++) o_word[o*QA +: QA] = o_q[o];
  always_comb begin
    for (int k = 0; k < KK; k++) raddr[k] = disp_addr[k];
    raddr[KK] = o_addr;                 // shortcut read, one cycle ahead of the add
  end

  always_ff @(posedge clk) begin
    r_word <= o_word;
    r_addr <= o_addr;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r_valid <= 1'b0;
    else        r_valid <= o_valid;
  end

  eltwise_add #(.L(T)) u_add (.a(r_word), .b(rdata[3][KK]), .y(sum_word));

  assign mw        = r_valid;
  assign mw_addr   = r_addr;
  assign mw_data   = d.add_sc ? sum_word : r_word;
  assign out_valid = r_valid && d.dst == 2'd3;
  assign out_data  = mw_data;
  assign out_addr  = r_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      written <= '0;
      stat_sc <= '0;
    end else begin
      if (state == S_LOAD) written <= '0;
      else if (r_valid)    written <= written + 1;
      if (r_valid && (d.add_sc || d.also_sc || d.dst == 2'd2)) stat_sc <= stat_sc + 1;
    end
  end

  a_no_sc_clash: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RUN) |-> !(d.add_sc && d.dst == 2'd2))
    else $error("main_layer: a layer cannot add the shortcut buffer into itself");
endmodule
