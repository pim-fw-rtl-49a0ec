// pim_bank: one DRAM bank with its row buffer and its array of bank PEs.
//
// The cell array holds ROWS rows of ROW_BITS bits. OP_ACT copies a row into
// the row buffer (the bank's global sense amplifiers) after T_RCD clocks;
// OP_PRE writes the row buffer back into the array and closes the bank,
// waiting first until T_RAS clocks have passed since the activate and T_WR
// clocks since the last write, then T_RP clocks. The open row is read and
// written one COL_BITS-wide column at a time (OP_RD, OP_WR).
//
// The row buffer is cut into BPB slices of SW words, one slice per bank PE.
// On OP_MINPLUS every BPE takes word `slot` of its own slice as D_ij, the
// shared scalar `dik` and its own `dkj[p]`, and 33 clocks later writes
// min(D_ij, D_ik + D_kj) back over word `slot`. So one command updates
// BPB words of the open row in place, without any data leaving the bank.
//
// Side outputs feed the broadcast network and the channel PE: `slot_words`
// is word `slot` of every slice (a piece of a pivot row), `col_data` is
// column `col` (a piece of a pivot column) and `red_word` is word `col` of
// the row buffer (a reduction operand). All three are combinational reads
// of the row buffer.
//
// Timing: a command is accepted only while `busy` is low; `busy` rises on
// the next clock for ACT, PRE and MINPLUS. RD data appears in `rdata` one
// clock after the command. Counts are clocks; at the assumed 1 GHz clock
// (2 Gb/s per pin, double data rate) they equal the source's nanoseconds.
//
// From the source: 16 BPEs per bank, 512-bit slices (16 words of 32 bits)
// of an 8192-bit (1 KB) row, write-back of D_new into the row buffer, and
// tRCD = 8, tRAS = 24, tRC = 30, tWR = 12 ns. Design choices: tRP = tRC -
// tRAS, write-back on precharge, the command handshake, and ROWS, which is
// 2048 instead of 32k rows because 512 banks of 32k rows (16 GiB) do not fit
// in a simulator's memory.
module pim_bank
  import pimfw_pkg::*;
#(
  parameter int unsigned W        = 32,
  parameter int unsigned BPB      = 16,    // BPEs per bank
  parameter int unsigned SW       = 16,    // words per BPE slice
  parameter int unsigned COL_BITS = 256,   // column width (DQ / ring width)
  parameter int unsigned ROWS     = 2048,
  parameter int unsigned T_RCD    = 8,
  parameter int unsigned T_RAS    = 24,
  parameter int unsigned T_RP     = 6,
  parameter int unsigned T_WR     = 12,
  localparam int unsigned ROW_BITS = BPB * SW * W,
  localparam int unsigned NCOL     = ROW_BITS / COL_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  input  pim_cmd_t             cmd,
  input  logic [COL_BITS-1:0]  wdata,
  input  logic [W-1:0]         dik,
  input  logic [W-1:0]         dkj [BPB],
  output logic [COL_BITS-1:0]  rdata,
  output logic [W-1:0]         slot_words [BPB],
  output logic [COL_BITS-1:0]  col_data,
  output logic [W-1:0]         red_word,
  output logic                 busy,
  output logic                 is_open,
  output logic [31:0]          upd_cnt      // BPE results that replaced D_ij
);
  typedef enum logic [2:0] {S_CLOSED, S_ACT, S_OPEN, S_PRE_WAIT, S_PRE, S_CALC} state_e;
  localparam int unsigned TW = 8;

  logic [ROW_BITS-1:0] mem [ROWS];
  logic [ROW_BITS-1:0] rowbuf;
  logic [$clog2(ROWS)-1:0] open_row;
  state_e              state;
  logic [TW-1:0]       tcnt, ras_cnt, wr_cnt;
  logic [$clog2(SW)-1:0] calc_slot;

  logic [BPB-1:0]      pe_busy, pe_done, pe_took;
  logic [W-1:0]        pe_dnew [BPB];
  logic [W-1:0]        pe_dij  [BPB];
  logic                pe_start;
  logic                mem_we;

  assign busy    = (state != S_CLOSED) && (state != S_OPEN);
  assign is_open = (state == S_OPEN);
  assign pe_start = cmd_valid && !busy && (cmd.op == OP_MINPLUS) && (state == S_OPEN);

  // combinational reads of the row buffer
  always_comb begin
    for (int p = 0; p < BPB; p++) begin
      slot_words[p] = rowbuf[(p*SW + int'(cmd.slot[$clog2(SW)-1:0]))*W +: W];
      pe_dij[p]     = slot_words[p];
    end
    col_data = rowbuf[int'(cmd.col) % NCOL * COL_BITS +: COL_BITS];
    red_word = rowbuf[int'(cmd.col) % (ROW_BITS/W) * W +: W];
  end

  for (genvar p = 0; p < BPB; p++) begin : g_pe
    bpe #(.W(W)) u_bpe (
      .clk, .rst_n, .start(pe_start), .dij(pe_dij[p]), .dik(dik), .dkj(dkj[p]),
      .busy(pe_busy[p]), .done(pe_done[p]), .dnew(pe_dnew[p]), .took(pe_took[p]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_CLOSED;
      rowbuf    <= '0;
      open_row  <= '0;
      tcnt      <= '0;
      ras_cnt   <= '0;
      wr_cnt    <= '0;
      rdata     <= '0;
      calc_slot <= '0;
      upd_cnt   <= '0;
    end else begin
      if (ras_cnt != TW'(T_RAS)) ras_cnt <= ras_cnt + 1'b1;
      if (wr_cnt  != TW'(T_WR))  wr_cnt  <= wr_cnt + 1'b1;
      unique case (state)
        S_CLOSED: if (cmd_valid && cmd.op == OP_ACT) begin
          open_row <= cmd.row[$clog2(ROWS)-1:0];
          tcnt     <= TW'(T_RCD - 1);
          ras_cnt  <= '0;
          state    <= S_ACT;
        end
        S_ACT: if (tcnt == '0) begin
          rowbuf <= mem[open_row];
          state  <= S_OPEN;
        end else tcnt <= tcnt - 1'b1;
        S_OPEN: if (cmd_valid) begin
          unique case (cmd.op)
            OP_PRE: state <= S_PRE_WAIT;
            OP_WR: begin
              rowbuf[int'(cmd.col) % NCOL * COL_BITS +: COL_BITS] <= wdata;
              wr_cnt <= '0;
            end
            OP_RD: rdata <= col_data;
            OP_MINPLUS: begin
              calc_slot <= cmd.slot[$clog2(SW)-1:0];
              state     <= S_CALC;
            end
            default: ;
          endcase
        end
        S_CALC: if (pe_done[0]) begin
          for (int p = 0; p < BPB; p++)
            rowbuf[(p*SW + int'(calc_slot))*W +: W] <= pe_dnew[p];
          upd_cnt <= upd_cnt + 32'($countones(pe_took));
          wr_cnt  <= '0;
          state   <= S_OPEN;
        end
        S_PRE_WAIT: if (mem_we) begin
          tcnt  <= TW'(T_RP - 1);
          state <= S_PRE;
        end
        S_PRE: if (tcnt == '0) state <= S_CLOSED;
               else tcnt <= tcnt - 1'b1;
        default: state <= S_CLOSED;
      endcase
    end
  end

  // restore of the open row into the cell array (the array has no reset)
  assign mem_we = (state == S_PRE_WAIT) && ras_cnt == TW'(T_RAS) && wr_cnt == TW'(T_WR);
  always_ff @(posedge clk) if (mem_we) mem[open_row] <= rowbuf;

  // protocol rules of the command port
  a_act_closed: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && !busy && cmd.op == OP_ACT) |-> state == S_CLOSED)
    else $error("pim_bank: ACT to an open bank");
  a_col_open: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && !busy && cmd.op inside {OP_RD, OP_WR, OP_MINPLUS, OP_PRE}) |-> state == S_OPEN)
    else $error("pim_bank: column command to a closed bank");
endmodule
