// Weight prefetcher: dense 1-bit weights, sparse block info and sparse weights.
//
// Parameters arrive as a stream of PW-bit words (from DRAM for the main layer, from
// the on-chip parameter memory for a pipelined layer), one record per
// K x K x TI x TO weight block, in the order the blocks are used:
//   word 0            : sparse block info, the number n of sparse weights (8 bits)
//   next DW words     : the dense block, TO*TI*KK weight bits, LSB first, bit
//                       index (o*TI + i)*KK + (ky*K + kx), 1 = +mean, 0 = -mean
//   next ceil(n/EPW)  : sparse entries, EPW per word from the LSB, each
//                       {out chnl, in chnl, <x,y>, 8-bit value} (MSB to LSB)
// When n is 0 no sparse word is read (the paper's skip), and the sparse kernel is
// switched off for that block. Two banks let the next block be fetched while the
// current one is in use: the fill side writes banks alternately, a bank becomes valid
// when its record is complete and is released by the consumer when its last window
// has entered the datapath. rd_bank selects which bank the outputs show.
// Packing several entries per word and the header-in-stream layout are this design's
// choices; the paper keeps block info and sparse weights in two buffers.
module weight_prefetch
  import mp_pkg::*;
#(
  parameter int unsigned TI = 16,
  parameter int unsigned TO = 16,
  parameter int unsigned KK = 9,
  parameter int unsigned NM = 27,
  parameter int unsigned PW = 64,
  localparam int unsigned OCW = idx_w(TO),
  localparam int unsigned ICW = idx_w(TI),
  localparam int unsigned XYW = idx_w(KK),
  localparam int unsigned EW  = OCW + ICW + XYW + QW,
  localparam int unsigned DB  = TO * TI * KK,
  localparam int unsigned DW  = (DB + PW - 1) / PW,
  localparam int unsigned EPW = PW / EW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // parameter word stream
  input  logic                 p_valid,
  input  logic [PW-1:0]        p_data,
  output logic                 p_ready,
  // bank status and release
  output logic [1:0]           bank_valid,
  input  logic                 release_valid,
  input  logic                 release_bank,
  // selected bank contents
  input  logic                 rd_bank,
  output logic [DB-1:0]        dense,
  output logic [CNT_W-1:0]     cnt,
  output logic [OCW-1:0]       e_oc [NM],
  output logic [ICW-1:0]       e_ic [NM],
  output logic [XYW-1:0]       e_xy [NM],
  output logic signed [QW-1:0] e_w  [NM]
);
  typedef enum logic [1:0] {S_HDR, S_DENSE, S_SPARSE} state_t;

  state_t                 state;
  logic                   fb;                 // bank being filled
  logic [DW*PW-1:0]       dense_q [2];
  logic [CNT_W-1:0]       cnt_q   [2];
  logic [EW-1:0]          ent_q   [2][NM];
  logic [idx_w(DW)-1:0]   wc;                 // dense word counter
  logic [CNT_W-1:0]       ec;                 // entries written so far

  assign p_ready = (state != S_HDR) || !bank_valid[fb];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_HDR;
      fb         <= 1'b0;
      bank_valid <= 2'b00;
      wc         <= '0;
      ec         <= '0;
    end else begin
      if (release_valid) bank_valid[release_bank] <= 1'b0;
      if (p_valid && p_ready) begin
        unique case (state)
          S_HDR: begin
            cnt_q[fb] <= p_data[CNT_W-1:0];
            wc        <= '0;
            state     <= S_DENSE;
          end
          S_DENSE: begin
            dense_q[fb][int'(wc)*PW +: PW] <= p_data;
            wc <= wc + 1'b1;
            if (int'(wc) == DW - 1) begin
              ec <= '0;
              if (cnt_q[fb] == '0) begin
                bank_valid[fb] <= 1'b1;
                fb             <= ~fb;
                state          <= S_HDR;
              end else begin
                state <= S_SPARSE;
              end
            end
          end
          S_SPARSE: begin
            for (int k = 0; k < EPW; k++)
              if (int'(ec) + k < NM) ent_q[fb][int'(ec) + k] <= p_data[k*EW +: EW];
            ec <= ec + CNT_W'(EPW);
            if (int'(ec) + EPW >= int'(cnt_q[fb])) begin
              bank_valid[fb] <= 1'b1;
              fb             <= ~fb;
              state          <= S_HDR;
            end
          end
          default: state <= S_HDR;
        endcase
      end
    end
  end

  always_comb begin
    dense = dense_q[rd_bank][DB-1:0];
    cnt   = cnt_q[rd_bank];
    for (int m = 0; m < NM; m++) begin
      {e_oc[m], e_ic[m], e_xy[m], e_w[m]} = ent_q[rd_bank][m];
    end
  end

// A record may not carry more sparse weights than there are multipliers.
  a_cnt_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (p_valid && p_ready && state == S_HDR) |-> (int'(p_data[CNT_W-1:0]) <= NM))
    else $error("weight_prefetch: block has more than N_multipliers=%0d sparse weights", NM);
endmodule
