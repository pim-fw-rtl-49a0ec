// tb_channel: a reduced channel (4 bank-groups of 2 banks x 2 BPEs, 64-bit
// columns). Checks that a broadcast is served one destination bank-group at
// a time (a pivot row to three bank-groups takes 3 x BEATS clocks, a
// column 3 clocks), that the delivered data is right (MINPLUS with
// D_ij = infinity and D_ik = 0 copies D_kj into the row), reads from a
// chosen bank-group, and the CPE's channel minimum, its bank-group index and
// its 5-clock latency.
module tb_channel;
  import pimfw_pkg::*;
  localparam int W = 32, G = 4, NB = 2, BPB = 2, SW = 4, CB = 64, ROWS = 4;
  localparam int NPE = NB * BPB, BEATS = NPE * W / CB, RB = BPB * SW * W, NCOL = RB / CB;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid, bc_start, bc_is_kj;
  pim_cmd_t cmd;
  logic [G-1:0] bg_sel, bc_dst;
  logic [CB-1:0] wdata, col_src, rdata;
  logic [NPE*W-1:0] bc_vec, kj_src;
  logic red_valid, red_found, busy;
  logic [W-1:0] red_min;
  logic [1:0] red_idx;
  logic [31:0] upd_cnt;
  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  channel #(.W(W), .G(G), .NB(NB), .BPB(BPB), .SW(SW), .COL_BITS(CB), .ROWS(ROWS)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .bg_sel, .wdata, .bc_start, .bc_is_kj, .bc_dst, .bc_vec,
    .kj_src, .col_src, .rdata, .red_valid, .red_found, .red_min, .red_idx, .busy, .upd_cnt);

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

  task automatic issue(input pim_cmd_t c, input logic [G-1:0] sel, output int clocks);
    int t0;
    @(negedge clk);
    while (busy) @(negedge clk);
    cmd = c; bg_sel = sel; cmd_valid = 1'b1; t0 = cyc;
    @(negedge clk);
    cmd_valid = 1'b0;
    while (busy) @(negedge clk);
    clocks = cyc - t0;
  endtask

  task automatic bcast(input bit kj, input logic [G-1:0] dst, input int entry, output int clocks);
    int t0;
    @(negedge clk);
    while (busy) @(negedge clk);
    cmd = '0; cmd.widx = WIDX_W'(entry);
    bc_start = 1'b1; bc_is_kj = kj; bc_dst = dst; t0 = cyc;
    @(negedge clk);
    bc_start = 1'b0;
    while (busy) @(negedge clk);
    clocks = cyc - t0;
  endtask

  function automatic pim_cmd_t mk(input pim_op_e op, input int bank = 0, input int col = 0,
                                  input int slot = 0, input int widx = 0, input int row = 0,
                                  input int src_bg = 0);
    pim_cmd_t c = '0;
    c.op = op; c.bank = IDX_W'(bank); c.col = COLI_W'(col); c.slot = SLOT_W'(slot);
    c.widx = WIDX_W'(widx); c.row = ROW_W'(row); c.src_bg = IDX_W'(src_bg);
    return c;
  endfunction

  initial begin
    int t;
    logic [NPE*W-1:0] vec;
    logic [W-1:0] vals [G];
    cmd_valid = 0; cmd = '0; bg_sel = '0; wdata = '0; bc_start = 0; bc_is_kj = 0;
    bc_dst = '0; bc_vec = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // pivot row to bank-groups 1..3: one after the other
    for (int i = 0; i < NPE; i++) vec[i*W +: W] = 32'(1000 + 17*i);
    bc_vec = vec;
    bcast(1'b1, 4'b1110, 0, t);
    chk(t == 3 * BEATS + 1, $sformatf("KJ broadcast to 3 bank-groups: %0d clocks", t));
    // D_ik = 0 into entry 0 of the same three
    bc_vec = '0;
    bcast(1'b0, 4'b1110, 0, t);
    chk(t == 3 + 1, $sformatf("IK broadcast to 3 bank-groups: %0d clocks", t));
    // rows of infinity, then one MINPLUS copies D_kj in
    issue(mk(OP_ACT, 0, 0, 0, 0, 1), 4'b1111, t);
    wdata = '1;
    for (int g = 0; g < G; g++)
      for (int b = 0; b < NB; b++)
        for (int k = 0; k < NCOL; k++) issue(mk(OP_WR, b, k), 4'(1 << g), t);
    issue(mk(OP_MINPLUS, 0, 0, 2, 0), 4'b1110, t);
    for (int g = 1; g < G; g++)
      for (int b = 0; b < NB; b++)
        for (int p = 0; p < BPB; p++) begin
          // word (p, slot 2) of bank b sits in column (p*SW+2)*W / CB
          int bit0;
          bit0 = (p*SW + 2) * W;
          issue(mk(OP_RD, b, bit0 / CB, 0, 0, 0, g), '0, t);
          chk(rdata[bit0 % CB +: W] == vec[(b*BPB+p)*W +: W],
              $sformatf("bg %0d bank %0d pe %0d got %h", g, b, p, rdata[bit0 % CB +: W]));
        end
    // bank-group 0 got no broadcast and no MINPLUS: still infinity
    issue(mk(OP_RD, 0, 0, 0, 0, 0, 0), '0, t);
    chk(rdata == '1, "bank-group 0 untouched");
    chk(int'(upd_cnt) == 3 * NPE, $sformatf("upd_cnt %0d", upd_cnt));
    // source outputs of bank-group 2
    cmd = mk(OP_NOP, 1, 0, 2, 0, 0, 2); #1;
    chk(kj_src == vec, "kj_src of bank-group 2");

    // reduction over word 5 of bank 1
    for (int g = 0; g < G; g++) begin
      vals[g] = 32'(($urandom % 1000) + 1);
      wdata = '1; wdata[W +: W] = vals[g];                  // word 5 = col 2, upper word
      issue(mk(OP_WR, 1, 2), 4'(1 << g), t);
    end
    vals[2] = 32'd0; wdata = '1; wdata[W +: W] = 32'd0;
    issue(mk(OP_WR, 1, 2), 4'b0100, t);
    begin
      int t0, lat;
      @(negedge clk);
      cmd = mk(OP_REDUCE, 1, 5); bg_sel = 4'b1011; cmd_valid = 1; t0 = cyc;
      @(negedge clk); cmd_valid = 0;
      while (!red_valid) @(negedge clk);
      lat = cyc - t0;
      chk(lat == 5, $sformatf("CPE latency %0d", lat));
      begin
        int bi;
        logic [W-1:0] mn;
        bi = 0; mn = '1;
        for (int g = 0; g < G; g++) if (g != 2 && vals[g] < mn) begin mn = vals[g]; bi = g; end
        chk(red_found && red_min == mn && int'(red_idx) == bi,
            $sformatf("channel min %0d@%0d exp %0d@%0d", red_min, red_idx, mn, bi));
      end
    end
    issue(mk(OP_PRE), 4'b1111, t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
