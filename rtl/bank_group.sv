// bank_group: NB PIM banks sharing one data buffer and one pivot-row register.
//
// A bank-group holds one B x B tile row-slice per DRAM row: its NB*BPB bank
// PEs (256 by default) cover the B = 256 columns of a tile, one column per
// BPE, so one OP_MINPLUS updates one tile row of B words in a single pass.
// The two operands that come from other tiles are held here:
//   * the pivot-row register `kj` (one word per BPE, D_kj), filled over the
//     broadcast ring one COL_BITS beat at a time (`kj_we`, `kj_beat`);
//   * the data buffer, DBUF_ENT entries of COL_BITS bits, filled one column
//     at a time (`ik_we`, `ik_entry`), whose words are the pivot-column
//     scalars D_ik; OP_MINPLUS picks word `cmd.widx` as D_ik for every BPE.
// ACT, PRE and MINPLUS go to every bank; WR and RD to bank `cmd.bank` only.
//
// Source outputs for broadcasts and reductions are combinational reads of
// the open rows: `kj_src` is word `cmd.slot` of every slice (a tile row),
// `col_src` is column `cmd.col` of bank `cmd.bank` (part of a tile column),
// `red_word` is word `cmd.col` of bank `cmd.bank`.
//
// Timing: `busy` is the OR of the banks' busy flags; RD data is in `rdata`
// one clock after the command.
//
// From the source: 16 banks x 16 BPEs = 256 BPEs per bank-group to match the
// tile width B = 256, and a data buffer of 8 x 256 bits with a 256-bit
// broadcast ring. How the buffer and the pivot-row register are used (D_ik
// scalars in the buffer, one D_kj word latched per BPE) is this design's
// reading: the source gives the buffer's size but not its use.
module bank_group
  import pimfw_pkg::*;
#(
  parameter int unsigned W        = 32,
  parameter int unsigned NB       = 16,   // banks per bank-group
  parameter int unsigned BPB      = 16,   // BPEs per bank
  parameter int unsigned SW       = 16,   // words per BPE slice
  parameter int unsigned COL_BITS = 256,
  parameter int unsigned ROWS     = 2048,
  parameter int unsigned DBUF_ENT = 8,
  localparam int unsigned NPE     = NB * BPB,
  localparam int unsigned WPB     = COL_BITS / W,        // words per beat
  localparam int unsigned BEATS   = NPE / WPB            // beats per pivot row
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cmd_valid,
  input  pim_cmd_t                    cmd,
  input  logic [COL_BITS-1:0]         wdata,
  input  logic                        kj_we,
  input  logic [$clog2(BEATS+1)-1:0]  kj_beat,
  input  logic [COL_BITS-1:0]         kj_data,
  input  logic                        ik_we,
  input  logic [$clog2(DBUF_ENT)-1:0] ik_entry,
  input  logic [COL_BITS-1:0]         ik_data,
  output logic [COL_BITS-1:0]         rdata,
  output logic [NPE*W-1:0]            kj_src,
  output logic [COL_BITS-1:0]         col_src,
  output logic [W-1:0]                red_word,
  output logic                        busy,
  output logic [31:0]                 upd_cnt
);
  logic [W-1:0]          kj   [NPE];
  logic [COL_BITS-1:0]   dbuf [DBUF_ENT];
  logic [W-1:0]          dik;
  logic [NB-1:0]         bk_busy;
  logic [COL_BITS-1:0]   bk_rdata [NB];
  logic [COL_BITS-1:0]   bk_col   [NB];
  logic [W-1:0]          bk_red   [NB];
  logic [31:0]           bk_upd   [NB];
  logic [W-1:0]          bk_slot  [NB][BPB];
  logic [$clog2(NB)-1:0] rd_bank;
  logic [$clog2(NB)-1:0] sel_bank;

  assign sel_bank = cmd.bank[$clog2(NB)-1:0];
  assign dik = dbuf[int'(cmd.widx) / WPB % DBUF_ENT][int'(cmd.widx) % WPB * W +: W];

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic bk_valid;
    logic [W-1:0] bk_dkj [BPB];
    for (genvar p = 0; p < BPB; p++) begin : g_dkj
      assign bk_dkj[p] = kj[b*BPB + p];
      assign kj_src[(b*BPB + p)*W +: W] = bk_slot[b][p];
    end
    assign bk_valid = cmd_valid &&
                      ((cmd.op inside {OP_ACT, OP_PRE, OP_MINPLUS}) ||
                       ((cmd.op inside {OP_WR, OP_RD}) && sel_bank == b));
    pim_bank #(.W(W), .BPB(BPB), .SW(SW), .COL_BITS(COL_BITS), .ROWS(ROWS)) u_bank (
      .clk, .rst_n, .cmd_valid(bk_valid), .cmd, .wdata, .dik, .dkj(bk_dkj),
      .rdata(bk_rdata[b]), .slot_words(bk_slot[b]), .col_data(bk_col[b]),
      .red_word(bk_red[b]), .busy(bk_busy[b]), .is_open(), .upd_cnt(bk_upd[b]));
  end

  assign busy     = |bk_busy;
  assign rdata    = bk_rdata[rd_bank];
  assign col_src  = bk_col[sel_bank];
  assign red_word = bk_red[sel_bank];

  always_comb begin
    upd_cnt = '0;
    for (int b = 0; b < NB; b++) upd_cnt += bk_upd[b];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_bank <= '0;
      for (int e = 0; e < DBUF_ENT; e++) dbuf[e] <= '0;
      for (int i = 0; i < NPE; i++) kj[i] <= '0;
    end else begin
      if (cmd_valid && cmd.op == OP_RD) rd_bank <= sel_bank;
      if (ik_we) dbuf[ik_entry] <= ik_data;
      if (kj_we)
        for (int q = 0; q < WPB; q++)
          kj[(int'(kj_beat) % BEATS)*WPB + q] <= kj_data[q*W +: W];
    end
  end
endmodule
