// channel: one HBM3 channel of the PIM stack: G bank-groups, the channel PE
// (CPE) and the channel's side of the broadcast network.
//
// Commands arrive from the memory controller with `bg_sel`, the bank-groups
// of this channel they address. ACT, PRE, MINPLUS and WR go to every
// selected bank-group at once; RD goes to bank-group `cmd.src_bg` and its
// data is in `rdata` one clock later.
//
// Broadcasts (`bc_start`) deliver a payload that the memory controller
// takes from a source bank-group, anywhere in the stack, to the bank-groups
// in `bc_dst`. Inside a channel the destinations are served one after the
// other over the shared 256-bit ring: an IK broadcast (one column into a
// data-buffer entry) takes one clock per destination bank-group, a KJ
// broadcast (a whole pivot row, one word per BPE) takes BEATS = NPE*W /
// COL_BITS clocks per destination. All channels run their broadcasts at
// the same time, so the cost of a broadcast is set by the channel with the
// most destinations. The payload (`bc_vec`) must stay stable until `busy`
// falls.
//
// OP_REDUCE hands word `cmd.col` of bank `cmd.bank` of every selected
// bank-group to the CPE, which returns the channel minimum and the
// bank-group it came from 5 clocks later (`red_valid`).
//
// `busy` is high while any bank-group, the broadcast sequencer or the CPE
// is working. From the source: bank-groups per channel, the CPE's role and
// 5-10 cycle latency, a 256-bit per-bank-group broadcast ring, broadcasts
// sequential inside a channel and parallel across channels. The command set
// and the ascending-order service of destinations are this design's.
module channel
  import pimfw_pkg::*;
#(
  parameter int unsigned W        = 32,
  parameter int unsigned G        = 4,
  parameter int unsigned NB       = 16,
  parameter int unsigned BPB      = 16,
  parameter int unsigned SW       = 16,
  parameter int unsigned COL_BITS = 256,
  parameter int unsigned ROWS     = 2048,
  parameter int unsigned DBUF_ENT = 8,
  localparam int unsigned NPE     = NB * BPB,
  localparam int unsigned BEATS   = NPE * W / COL_BITS,
  localparam int unsigned GW      = (G > 1) ? $clog2(G) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  input  pim_cmd_t            cmd,
  input  logic [G-1:0]        bg_sel,
  input  logic [COL_BITS-1:0] wdata,
  // broadcast delivery
  input  logic                bc_start,
  input  logic                bc_is_kj,
  input  logic [G-1:0]        bc_dst,
  input  logic [NPE*W-1:0]    bc_vec,      // KJ: full row; IK: low COL_BITS
  // source reads of bank-group cmd.src_bg
  output logic [NPE*W-1:0]    kj_src,
  output logic [COL_BITS-1:0] col_src,
  output logic [COL_BITS-1:0] rdata,
  // reduction result
  output logic                red_valid,
  output logic                red_found,
  output logic [W-1:0]        red_min,
  output logic [GW-1:0]       red_idx,
  output logic                busy,
  output logic [31:0]         upd_cnt
);
  logic [G-1:0]          bg_busy;
  logic [COL_BITS-1:0]   bg_rdata [G];
  logic [NPE*W-1:0]      bg_kj    [G];
  logic [COL_BITS-1:0]   bg_col   [G];
  logic [W-1:0]          bg_red   [G];
  logic [31:0]           bg_upd   [G];
  logic [G-1:0]          bg_kj_we, bg_ik_we;
  logic [GW-1:0]         rd_bg;
  logic [GW-1:0]         src_bg;

  // broadcast sequencer state
  logic                         bc_act, bc_kj;
  logic [G-1:0]                 bc_left;
  logic [$clog2(BEATS+1)-1:0]   bc_beat;
  logic [GW-1:0]                bc_cur;
  logic                         red_pend;
  logic                         cpe_busy;

  assign src_bg = cmd.src_bg[GW-1:0];

  // lowest destination still to be served
  always_comb begin
    bc_cur = '0;
    for (int g = G - 1; g >= 0; g--) if (bc_left[g]) bc_cur = GW'(g);
  end

  always_comb begin
    bg_kj_we = '0;
    bg_ik_we = '0;
    if (bc_act && bc_left != '0) begin
      if (bc_kj) bg_kj_we[bc_cur] = 1'b1;
      else       bg_ik_we[bc_cur] = 1'b1;
    end
  end

  for (genvar g = 0; g < G; g++) begin : g_bg
    logic v;
    assign v = cmd_valid && bg_sel[g] &&
               (cmd.op inside {OP_ACT, OP_PRE, OP_MINPLUS, OP_WR});
    bank_group #(.W(W), .NB(NB), .BPB(BPB), .SW(SW), .COL_BITS(COL_BITS),
                 .ROWS(ROWS), .DBUF_ENT(DBUF_ENT)) u_bg (
      .clk, .rst_n,
      .cmd_valid(v || (cmd_valid && cmd.op == OP_RD && src_bg == g)),
      .cmd, .wdata,
      .kj_we(bg_kj_we[g]), .kj_beat(bc_beat),
      .kj_data(bc_vec[int'(bc_beat) % BEATS * COL_BITS +: COL_BITS]),
      .ik_we(bg_ik_we[g]), .ik_entry(cmd.widx[$clog2(DBUF_ENT)-1:0]),
      .ik_data(bc_vec[COL_BITS-1:0]),
      .rdata(bg_rdata[g]), .kj_src(bg_kj[g]), .col_src(bg_col[g]),
      .red_word(bg_red[g]), .busy(bg_busy[g]), .upd_cnt(bg_upd[g]));
  end

  assign kj_src  = bg_kj[src_bg];
  assign col_src = bg_col[src_bg];
  assign rdata   = bg_rdata[rd_bg];

  always_comb begin
    upd_cnt = '0;
    for (int g = 0; g < G; g++) upd_cnt += bg_upd[g];
  end

  cpe #(.W(W), .N_IN(G)) u_cpe (
    .clk, .rst_n,
    .in_valid(cmd_valid && cmd.op == OP_REDUCE), .in_mask(bg_sel), .in_val(bg_red),
    .out_valid(red_valid), .out_found(red_found), .out_min(red_min), .out_idx(red_idx));

  assign cpe_busy = red_pend;
  assign busy     = (|bg_busy) || bc_act || cpe_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_bg    <= '0;
      bc_act   <= 1'b0;
      bc_kj    <= 1'b0;
      bc_left  <= '0;
      bc_beat  <= '0;
      red_pend <= 1'b0;
    end else begin
      if (cmd_valid && cmd.op == OP_RD) rd_bg <= src_bg;
      if (cmd_valid && cmd.op == OP_REDUCE) red_pend <= 1'b1;
      else if (red_valid)                   red_pend <= 1'b0;
      if (bc_start) begin
        bc_act  <= (bc_dst != '0);
        bc_kj   <= bc_is_kj;
        bc_left <= bc_dst;
        bc_beat <= '0;
      end else if (bc_act) begin
        if (!bc_kj || int'(bc_beat) == BEATS - 1) begin
          bc_left[bc_cur] <= 1'b0;
          bc_beat         <= '0;
          if ((bc_left & ~(G'(1) << bc_cur)) == '0) bc_act <= 1'b0;
        end else begin
          bc_beat <= bc_beat + 1'b1;
        end
      end
    end
  end

  a_bc_idle: assert property (@(posedge clk) disable iff (!rst_n) bc_start |-> !bc_act)
    else $error("channel: broadcast started while one is running");
endmodule
