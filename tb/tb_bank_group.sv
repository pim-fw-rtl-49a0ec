// tb_bank_group: a reduced bank-group (2 banks x 2 BPEs, 4-word slices,
// 64-bit columns) against a model in the testbench. Fills the pivot-row
// register beat by beat and the data buffer entry by entry, writes a row in
// both banks, runs MINPLUS on every slot with different data-buffer words,
// and checks the results by reading the row back, plus the broadcast source
// outputs (kj_src, col_src, red_word) and the update counter.
module tb_bank_group;
  import pimfw_pkg::*;
  localparam int W = 32, NB = 2, BPB = 2, SW = 4, CB = 64, ROWS = 4, DE = 8;
  localparam int NPE = NB * BPB, WPB = CB / W, BEATS = NPE / WPB;
  localparam int RB = BPB * SW * W, NCOL = RB / CB;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid;
  pim_cmd_t cmd;
  logic [CB-1:0] wdata, rdata, kj_data, ik_data, col_src;
  logic kj_we, ik_we;
  logic [$clog2(BEATS+1)-1:0] kj_beat;
  logic [2:0] ik_entry;
  logic [NPE*W-1:0] kj_src;
  logic [W-1:0] red_word;
  logic busy;
  logic [31:0] upd_cnt;
  logic [W-1:0] kj_m [NPE];
  logic [W-1:0] buf_m [DE*WPB];
  logic [RB-1:0] row_m [NB];
  int checks = 0, failures = 0, exp_upd = 0;

  always #5 clk = ~clk;

  bank_group #(.W(W), .NB(NB), .BPB(BPB), .SW(SW), .COL_BITS(CB), .ROWS(ROWS), .DBUF_ENT(DE)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .wdata, .kj_we, .kj_beat, .kj_data, .ik_we, .ik_entry,
    .ik_data, .rdata, .kj_src, .col_src, .red_word, .busy, .upd_cnt);

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

  task automatic issue(input pim_cmd_t c);
    @(negedge clk);
    while (busy) @(negedge clk);
    cmd = c; cmd_valid = 1'b1;
    @(negedge clk);
    cmd_valid = 1'b0;
    while (busy) @(negedge clk);
  endtask

  function automatic pim_cmd_t mk(input pim_op_e op, input int bank = 0, input int col = 0,
                                  input int slot = 0, input int widx = 0, input int row = 0);
    pim_cmd_t c = '0;
    c.op = op; c.bank = IDX_W'(bank); c.col = COLI_W'(col); c.slot = SLOT_W'(slot);
    c.widx = WIDX_W'(widx); c.row = ROW_W'(row);
    return c;
  endfunction

  initial begin
    cmd_valid = 0; cmd = '0; wdata = '0; kj_we = 0; ik_we = 0; kj_beat = '0; ik_entry = '0;
    kj_data = '0; ik_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // pivot-row register, beat by beat
    for (int b = 0; b < BEATS; b++) begin
      @(negedge clk);
      kj_we = 1; kj_beat = 2'(b); kj_data = {$urandom >> 3, $urandom >> 3};
      for (int q = 0; q < WPB; q++) kj_m[b*WPB + q] = kj_data[q*W +: W];
    end
    @(negedge clk); kj_we = 0;
    // data buffer
    for (int e = 0; e < DE; e++) begin
      @(negedge clk);
      ik_we = 1; ik_entry = 3'(e); ik_data = {$urandom >> 3, $urandom >> 3};
      if (e == 1) ik_data[31:0] = '1;
      for (int q = 0; q < WPB; q++) buf_m[e*WPB + q] = ik_data[q*W +: W];
    end
    @(negedge clk); ik_we = 0;
    // open row 2 and fill both banks
    issue(mk(OP_ACT, 0, 0, 0, 0, 2));
    for (int b = 0; b < NB; b++)
      for (int k = 0; k < NCOL; k++) begin
        wdata = {$urandom, $urandom};
        row_m[b][k*CB +: CB] = wdata;
        issue(mk(OP_WR, b, k));
      end
    // source outputs
    for (int s = 0; s < SW; s++) begin
      cmd = mk(OP_NOP, 0, 0, s); #1;
      for (int b = 0; b < NB; b++)
        for (int p = 0; p < BPB; p++)
          chk(kj_src[(b*BPB+p)*W +: W] == row_m[b][(p*SW+s)*W +: W], "kj_src");
    end
    cmd = mk(OP_NOP, 1, 3); #1;
    chk(col_src == row_m[1][3*CB +: CB], "col_src");
    chk(red_word == row_m[1][3*W +: W], "red_word");
    // MINPLUS on every slot, D_ik from buffer words 2*s+1
    for (int s = 0; s < SW; s++) begin
      int wi;
      wi = (2*s + 1) % (DE*WPB);
      issue(mk(OP_MINPLUS, 0, 0, s, wi));
      for (int b = 0; b < NB; b++)
        for (int p = 0; p < BPB; p++) begin
          logic [W:0] sum;
          sum = {1'b0, buf_m[wi]} + {1'b0, kj_m[b*BPB+p]};
          if (sum < {1'b0, row_m[b][(p*SW+s)*W +: W]}) begin
            row_m[b][(p*SW+s)*W +: W] = sum[W-1:0];
            exp_upd++;
          end
        end
    end
    for (int b = 0; b < NB; b++)
      for (int k = 0; k < NCOL; k++) begin
        issue(mk(OP_RD, b, k));
        chk(rdata == row_m[b][k*CB +: CB], $sformatf("bank %0d col %0d", b, k));
      end
    chk(int'(upd_cnt) == exp_upd && exp_upd > 0, $sformatf("upd_cnt %0d exp %0d", upd_cnt, exp_upd));
    issue(mk(OP_PRE));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
