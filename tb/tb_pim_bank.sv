// tb_pim_bank: a reduced bank (4 BPEs, 4-word slices, 64-bit columns,
// 8 rows) checked against a row-buffer model kept in the testbench:
// activate/precharge timing (tRCD, tRAS, tWR, tRP), column writes and reads,
// the side reads (slot words, column, reduction word), a MINPLUS pass on
// every slot with known and random operands, the update counter, and that
// rows survive a precharge and re-activate.
module tb_pim_bank;
  import pimfw_pkg::*;
  localparam int W = 32, BPB = 4, SW = 4, CB = 64, ROWS = 8;
  localparam int RB = BPB * SW * W, NCOL = RB / CB;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid;
  pim_cmd_t cmd;
  logic [CB-1:0] wdata, rdata, col_data;
  logic [W-1:0] dik, red_word;
  logic [W-1:0] dkj [BPB];
  logic [W-1:0] slot_words [BPB];
  logic busy, is_open;
  logic [31:0] upd_cnt;
  logic [RB-1:0] model [ROWS];
  logic [RB-1:0] cur;
  int checks = 0, failures = 0, cyc = 0, exp_upd = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  pim_bank #(.W(W), .BPB(BPB), .SW(SW), .COL_BITS(CB), .ROWS(ROWS)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .wdata, .dik, .dkj, .rdata, .slot_words,
    .col_data, .red_word, .busy, .is_open, .upd_cnt);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // issue one command, return the clocks until the bank is idle again
  task automatic issue(input pim_cmd_t c, output int clocks);
    int t0;
    @(negedge clk);
    while (busy) @(negedge clk);
    cmd = c; cmd_valid = 1'b1; t0 = cyc;
    @(negedge clk);
    cmd_valid = 1'b0;
    while (busy) @(negedge clk);
    clocks = cyc - t0;
  endtask

  function automatic pim_cmd_t mk(input pim_op_e op, input int row = 0, input int col = 0,
                                  input int slot = 0);
    pim_cmd_t c = '0;
    c.op = op; c.row = ROW_W'(row); c.col = COLI_W'(col); c.slot = SLOT_W'(slot);
    return c;
  endfunction

  task automatic fill_row(input int row);
    int t;
    pim_cmd_t c;
    issue(mk(OP_ACT, row), t);
    for (int k = 0; k < NCOL; k++) begin
      wdata = {$urandom, $urandom};
      if (k == 1) wdata[31:0] = '1;               // an infinite distance
      cur[k*CB +: CB] = wdata;
      c = mk(OP_WR, 0, k);
      issue(c, t);
    end
    model[row] = cur;
  endtask

  initial begin
    int t, t_act, t_pre;
    cmd_valid = 1'b0; cmd = '0; wdata = '0; dik = '0;
    for (int p = 0; p < BPB; p++) dkj[p] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // activate timing
    issue(mk(OP_ACT, 3), t_act);
    chk(t_act == 8 + 1, $sformatf("ACT takes tRCD (+1 to open): %0d", t_act));
    chk(is_open, "open after ACT");
    issue(mk(OP_PRE), t_pre);
    chk(t_pre >= 24 - t_act, $sformatf("PRE honours tRAS: %0d", t_pre));

    // row 3: write, read back
    fill_row(3);
    for (int k = 0; k < NCOL; k++) begin
      issue(mk(OP_RD, 0, k), t);
      chk(rdata == cur[k*CB +: CB], $sformatf("RD col %0d", k));
      cmd = mk(OP_RD, 0, k); #1;
      chk(col_data == cur[k*CB +: CB], "col_data");
    end
    for (int s = 0; s < SW; s++) begin
      cmd = mk(OP_NOP, 0, 0, s); #1;
      for (int p = 0; p < BPB; p++)
        chk(slot_words[p] == cur[(p*SW+s)*W +: W], "slot_words");
    end
    cmd = mk(OP_NOP, 0, 5); #1;
    chk(red_word == cur[5*W +: W], "red_word");

    // MINPLUS on every slot
    for (int s = 0; s < SW; s++) begin
      dik = (s == 0) ? 32'd0 : ((s == 1) ? '1 : ($urandom >> 2));
      for (int p = 0; p < BPB; p++) dkj[p] = (s == 0) ? 32'(p) : ($urandom >> 2);
      issue(mk(OP_MINPLUS, 0, 0, s), t);
      chk(t == 34 + 1, $sformatf("MINPLUS latency %0d", t));
      for (int p = 0; p < BPB; p++) begin
        logic [W:0] sum;
        logic [W-1:0] old;
        old = cur[(p*SW+s)*W +: W];
        sum = {1'b0, dik} + {1'b0, dkj[p]};
        if (sum < {1'b0, old}) begin cur[(p*SW+s)*W +: W] = sum[W-1:0]; exp_upd++; end
      end
    end
    chk(int'(upd_cnt) == exp_upd && exp_upd > 0, $sformatf("upd_cnt %0d exp %0d", upd_cnt, exp_upd));
    for (int k = 0; k < NCOL; k++) begin
      issue(mk(OP_RD, 0, k), t);
      chk(rdata == cur[k*CB +: CB], $sformatf("after MINPLUS col %0d", k));
    end
    model[3] = cur;
    wdata = cur[0 +: CB];
    issue(mk(OP_WR, 0, 0), t);                  // a write right before the precharge
    issue(mk(OP_PRE), t_pre);
    chk(t_pre >= 12 + 6, $sformatf("PRE after write waits tWR + tRP: %0d", t_pre));

    // another row, then row 3 again
    fill_row(6);
    issue(mk(OP_PRE), t);
    issue(mk(OP_ACT, 3), t);
    for (int k = 0; k < NCOL; k++) begin
      issue(mk(OP_RD, 0, k), t);
      chk(rdata == model[3][k*CB +: CB], $sformatf("row 3 kept col %0d", k));
    end
    issue(mk(OP_PRE), t);
    issue(mk(OP_ACT, 6), t);
    issue(mk(OP_RD, 0, 2), t);
    chk(rdata == model[6][2*CB +: CB], "row 6 kept");
    issue(mk(OP_PRE), t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
