// pimfw_top: an HBM3 stack with processing in and near memory for blocked
// Floyd-Warshall all-pairs shortest paths.
//
// The stack has C channels of G bank-groups of NB banks; every bank carries
// BPB bank PEs (BPEs) on its row buffer, every channel a channel PE (CPE).
// With the default 8 x 4 x 16 x 16 that is 8192 BPEs, 256 per bank-group,
// one per column of a 256 x 256 tile. This module is the memory controller
// in front of them. It executes one command at a time, from the host port or
// from the built-in blocked Floyd-Warshall scheduler (OP_FW), and waits for
// the stack to go idle before the next one.
//
// Host port: `host_valid`/`host_ready` hand over one pim_cmd_t (and
// `host_wdata` for OP_WR); `host_done` pulses when it has completed, with
// `host_rdata` valid for OP_RD and the `red_*` outputs valid for OP_REDUCE.
// Bank-groups are addressed by g = ch*G + bg, in `dst_mask` bit g.
//   ACT/PRE/MINPLUS  every bank-group set in dst_mask (all their banks)
//   WR/RD            one bank (dst_mask / src_ch, src_bg) and column
//   BCAST_KJ         word `slot` of every BPE slice of bank-group
//                    (src_ch, src_bg) into the pivot-row registers of every
//                    bank-group in dst_mask
//   BCAST_IK         column `col` of bank `bank` of (src_ch, src_bg) into
//                    data-buffer entry `widx` of every bank-group in dst_mask
//   REDUCE           minimum of word `col` of bank `bank` over the
//                    bank-groups in dst_mask: each channel's CPE reduces its
//                    bank-groups, then a second comparison tree here reduces
//                    the channels' results
//   FW               blocked Floyd-Warshall over M = `slot` tiles per row,
//                    tiles placed by the interleaved mapping (tile_mapper)
// Broadcast payloads are read straight from the source's open row buffers
// and stay stable because this controller holds the command until the stack
// is idle. The channels deliver them in parallel, each channel serving its
// own destinations one after the other.
//
// Completion: a command is driven for one clock; the controller then waits
// one clock and until no channel is busy (and, for REDUCE, until the global
// tree has answered). `cycles` counts clocks since reset and `upd_cnt` the
// BPE results that replaced their old value.
//
// From the source: the organization and its sizes, the BPE/CPE split, the
// controller issuing the phase commands, the global minimum found at the
// memory controller from the channel minima. The command set and the
// one-command-at-a-time execution are this design's.
module pimfw_top
  import pimfw_pkg::*;
#(
  parameter int unsigned W        = 32,
  parameter int unsigned C        = 8,     // channels
  parameter int unsigned G        = 4,     // bank-groups per channel
  parameter int unsigned NB       = 16,    // banks per bank-group
  parameter int unsigned BPB      = 16,    // BPEs per bank
  parameter int unsigned SW       = 16,    // words per BPE slice (512 bits)
  parameter int unsigned COL_BITS = 256,   // column / ring width
  parameter int unsigned ROWS     = 2048,  // rows per bank (32k in the source)
  parameter int unsigned DBUF_ENT = 8,
  localparam int unsigned NPE     = NB * BPB,
  localparam int unsigned CW      = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned GW      = (G > 1) ? $clog2(G) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                host_valid,
  output logic                host_ready,
  input  pim_cmd_t            host_cmd,
  input  logic [COL_BITS-1:0] host_wdata,
  output logic                host_done,
  output logic [COL_BITS-1:0] host_rdata,
  output logic                red_found,
  output logic [W-1:0]        red_min,
  output logic [CW-1:0]       red_ch,
  output logic [GW-1:0]       red_bg,
  output logic                fw_busy,
  output logic [63:0]         cycles,
  output logic [31:0]         upd_cnt
);
  typedef enum logic [2:0] {M_IDLE, M_FW, M_ISSUE, M_GAP, M_WAIT} mstate_e;

  mstate_e              mst;
  logic                 from_fw;
  pim_cmd_t             cur;
  logic [COL_BITS-1:0]  cur_wdata;

  // scheduler
  logic      s_valid, s_accept, s_ack, s_done, s_busy, s_start;
  pim_cmd_t  s_cmd;

  // channel signals
  logic [C-1:0]          ch_busy, ch_red_valid, ch_red_found;
  logic [W-1:0]          ch_red_min [C];
  logic [GW-1:0]         ch_red_idx [C];
  logic [GW-1:0]         ch_red_idx_q [C];
  logic [NPE*W-1:0]      ch_kj  [C];
  logic [COL_BITS-1:0]   ch_col [C];
  logic [COL_BITS-1:0]   ch_rd  [C];
  logic [31:0]           ch_upd [C];
  logic [NPE*W-1:0]      bc_vec;
  logic [CW-1:0]         src_ch;
  logic                  issue, is_bcast;
  logic                  g_valid, g_found, red_wait;
  logic [W-1:0]          g_min;
  logic [CW-1:0]         g_idx;

  assign src_ch   = cur.src_ch[CW-1:0];
  assign issue    = (mst == M_ISSUE);
  assign is_bcast = cur.op inside {OP_BCAST_KJ, OP_BCAST_IK};
  assign bc_vec   = (cur.op == OP_BCAST_KJ) ? ch_kj[src_ch]
                                            : (NPE*W)'(ch_col[src_ch]);
  assign host_ready = (mst == M_IDLE);
  assign fw_busy    = s_busy;
  assign s_accept   = (mst == M_FW) && s_valid;
  assign s_start    = (mst == M_IDLE) && host_valid && host_cmd.op == OP_FW;

  fw_scheduler #(.C(C), .G(G), .NB(NB), .BPB(BPB), .SW(SW), .W(W), .COL_BITS(COL_BITS)) u_sched (
    .clk, .rst_n, .start(s_start), .m(host_cmd.slot),
    .cmd_valid(s_valid), .cmd(s_cmd), .cmd_accept(s_accept), .cmd_ack(s_ack),
    .busy(s_busy), .done(s_done));

  for (genvar c = 0; c < C; c++) begin : g_ch
    logic v;
    assign v = issue && !is_bcast && (cur.op != OP_RD || src_ch == c);
    channel #(.W(W), .G(G), .NB(NB), .BPB(BPB), .SW(SW), .COL_BITS(COL_BITS),
              .ROWS(ROWS), .DBUF_ENT(DBUF_ENT)) u_ch (
      .clk, .rst_n, .cmd_valid(v), .cmd(cur), .bg_sel(cur.dst_mask[c*G +: G]),
      .wdata(cur_wdata),
      .bc_start(issue && is_bcast), .bc_is_kj(cur.op == OP_BCAST_KJ),
      .bc_dst(cur.dst_mask[c*G +: G]), .bc_vec(bc_vec),
      .kj_src(ch_kj[c]), .col_src(ch_col[c]), .rdata(ch_rd[c]),
      .red_valid(ch_red_valid[c]), .red_found(ch_red_found[c]),
      .red_min(ch_red_min[c]), .red_idx(ch_red_idx[c]),
      .busy(ch_busy[c]), .upd_cnt(ch_upd[c]));
  end

  // global reduction over the channel minima
  cpe #(.W(W), .N_IN(C)) u_global (
    .clk, .rst_n, .in_valid(ch_red_valid[0]), .in_mask(ch_red_found), .in_val(ch_red_min),
    .out_valid(g_valid), .out_found(g_found), .out_min(g_min), .out_idx(g_idx));

  always_comb begin
    upd_cnt = '0;
    for (int c = 0; c < C; c++) upd_cnt += ch_upd[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mst        <= M_IDLE;
      from_fw    <= 1'b0;
      cur        <= '0;
      cur_wdata  <= '0;
      host_done  <= 1'b0;
      host_rdata <= '0;
      red_found  <= 1'b0;
      red_min    <= '0;
      red_ch     <= '0;
      red_bg     <= '0;
      red_wait   <= 1'b0;
      s_ack      <= 1'b0;
      cycles     <= '0;
      for (int c = 0; c < C; c++) ch_red_idx_q[c] <= '0;
    end else begin
      cycles    <= cycles + 1'b1;
      host_done <= 1'b0;
      s_ack     <= 1'b0;
      if (ch_red_valid[0])
        for (int c = 0; c < C; c++) ch_red_idx_q[c] <= ch_red_idx[c];
      if (g_valid) begin
        red_wait  <= 1'b0;
        red_found <= g_found;
        red_min   <= g_min;
        red_ch    <= g_idx;
        red_bg    <= ch_red_idx_q[g_idx];
      end
      unique case (mst)
        M_IDLE: if (host_valid) begin
          if (host_cmd.op == OP_FW) mst <= M_FW;
          else begin
            cur       <= host_cmd;
            cur_wdata <= host_wdata;
            from_fw   <= 1'b0;
            mst       <= M_ISSUE;
          end
        end
        M_FW: begin
          if (s_valid) begin
            cur     <= s_cmd;
            from_fw <= 1'b1;
            mst     <= M_ISSUE;
          end else if (s_done || !s_busy) begin
            host_done <= 1'b1;
            mst       <= M_IDLE;
          end
        end
        M_ISSUE: begin
          if (cur.op == OP_REDUCE) red_wait <= 1'b1;
          mst <= M_GAP;
        end
        M_GAP:  mst <= M_WAIT;
        M_WAIT: if (ch_busy == '0 && !red_wait) begin
          if (cur.op == OP_RD) host_rdata <= ch_rd[src_ch];
          if (from_fw) begin s_ack <= 1'b1; mst <= M_FW; end
          else begin host_done <= 1'b1; mst <= M_IDLE; end
        end
        default: mst <= M_IDLE;
      endcase
    end
  end
endmodule
