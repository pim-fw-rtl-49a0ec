// tb_pimfw_full: one complete parallel update step on the stack at its full
// size (8 channels x 4 bank-groups x 16 banks x 16 BPEs = 8192 BPEs, 256-bit
// columns), with every parameter at its default. The host opens row 0 in
// all 32 bank-groups, writes a pivot source row into bank-group 0 and known
// distances into four destination bank-groups spread over the channels,
// broadcasts the pivot row (one word per BPE) to all 32 bank-groups and a
// pivot column into their data buffers, runs one MINPLUS on all 8192 BPEs
// at once, reads the destinations back and compares them with
// min(D_ij, D_ik + D_kj) worked out here. It also checks the broadcast
// timing (four destinations per channel against one, 3 x 32 ring beats
// apart) and a REDUCE over the written bank-groups.
module tb_pimfw_full;
  import pimfw_pkg::*;
  localparam int W = 32, C = 8, G = 4, NB = 16, BPB = 16, SW = 16, CB = 256;
  localparam int CG = C * G, NPE = NB * BPB, RB = BPB * SW * W, NCOL = RB / CB;
  localparam int BEATS = NPE * W / CB;
  localparam int ND = 4;
  localparam int DST [ND] = '{5, 10, 19, 31};
  logic clk = 1'b0, rst_n = 1'b0;
  logic host_valid, host_ready, host_done, fw_busy, red_found;
  pim_cmd_t host_cmd;
  logic [CB-1:0] host_wdata, host_rdata;
  logic [W-1:0] red_min;
  logic [2:0] red_ch;
  logic [1:0] red_bg;
  logic [63:0] cycles;
  logic [31:0] upd_cnt;
  logic [RB-1:0] src_row [NB];
  logic [RB-1:0] dst_row [ND][NB];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pimfw_top dut (
    .clk, .rst_n, .host_valid, .host_ready, .host_cmd, .host_wdata, .host_done, .host_rdata,
    .red_found, .red_min, .red_ch, .red_bg, .fw_busy, .cycles, .upd_cnt);

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic host(input pim_cmd_t c, input logic [CB-1:0] wd = '0);
    @(negedge clk);
    while (!host_ready) @(negedge clk);
    host_cmd = c; host_wdata = wd; host_valid = 1'b1;
    @(negedge clk);
    host_valid = 1'b0;
    while (!host_done) @(negedge clk);
  endtask

  function automatic pim_cmd_t mk(input pim_op_e op, input int g = 0, input int bank = 0,
                                  input int col = 0);
    pim_cmd_t c = '0;
    c.op = op; c.dst_mask = MASK_W'(1) << g;
    c.src_ch = IDX_W'(g / G); c.src_bg = IDX_W'(g % G);
    c.bank = IDX_W'(bank); c.col = COLI_W'(col);
    return c;
  endfunction

  task automatic write_row(input int g, input logic [RB-1:0] rv [NB]);
    for (int bk = 0; bk < NB; bk++)
      for (int k = 0; k < NCOL; k++) host(mk(OP_WR, g, bk, k), rv[bk][k*CB +: CB]);
  endtask

  initial begin
    pim_cmd_t c;
    longint t0;
    int t_all, t_one;
    logic [W-1:0] dik;
    host_valid = 1'b0; host_cmd = '0; host_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    c = '0; c.op = OP_ACT; c.dst_mask = MASK_W'({CG{1'b1}}); c.row = '0;
    host(c);
    for (int bk = 0; bk < NB; bk++)
      for (int w = 0; w < RB / W; w++) src_row[bk][w*W +: W] = 32'($urandom % 1000);
    write_row(0, src_row);
    for (int d = 0; d < ND; d++) begin
      for (int bk = 0; bk < NB; bk++)
        for (int w = 0; w < RB / W; w++)
          dst_row[d][bk][w*W +: W] = ($urandom % 4 == 0) ? '1 : 32'($urandom % 2000);
      write_row(DST[d], dst_row[d]);
    end

    // pivot row (slot 0 of every slice of bank-group 0) to every bank-group
    c = mk(OP_BCAST_KJ, 0); c.dst_mask = MASK_W'({CG{1'b1}}); c.slot = '0;
    t0 = longint'(cycles); host(c); t_all = int'(longint'(cycles) - t0);
    // the same to bank-group 1 of every channel only
    c.dst_mask = '0;
    for (int ch = 0; ch < C; ch++) c.dst_mask[ch*G + 1] = 1'b1;
    t0 = longint'(cycles); host(c); t_one = int'(longint'(cycles) - t0);
    chk(t_all - t_one == 3 * BEATS, $sformatf("broadcast %0d vs %0d clocks", t_all, t_one));
    // pivot column: column 0 of bank 0 into data-buffer entry 0 of every bank-group
    c = mk(OP_BCAST_IK, 0, 0, 0); c.dst_mask = MASK_W'({CG{1'b1}}); c.widx = '0;
    host(c);
    dik = src_row[0][2*W +: W];                // data-buffer word 2

    // one MINPLUS on all 8192 BPEs: slot 3, D_ik = buffer word 2
    c = '0; c.op = OP_MINPLUS; c.dst_mask = MASK_W'({CG{1'b1}}); c.slot = 8'd3; c.widx = 8'd2;
    t0 = longint'(cycles); host(c);
    $display("MINPLUS on %0d BPEs: %0d clocks", CG * NPE, longint'(cycles) - t0);
    chk(longint'(cycles) - t0 <= 40, "one pass of all BPEs");

    for (int d = 0; d < ND; d++)
      for (int bk = 0; bk < NB; bk++)
        for (int p = 0; p < BPB; p++) begin
          int off;
          logic [W:0] sum;
          logic [W-1:0] old, expv, dkj;
          off  = (p*SW + 3) * W;
          old  = dst_row[d][bk][off +: W];
          dkj  = src_row[bk][(p*SW + 0) * W +: W];
          sum  = {1'b0, dik} + {1'b0, dkj};
          expv = (sum < {1'b0, old}) ? sum[W-1:0] : old;
          dst_row[d][bk][off +: W] = expv;
          host(mk(OP_RD, DST[d], bk, off / CB));
          chk(host_rdata[off % CB +: W] == expv,
              $sformatf("bg %0d bank %0d pe %0d: %0d exp %0d", DST[d], bk, p,
                        host_rdata[off % CB +: W], expv));
        end

    // reduction of word 3 of bank 0 over bank-group 0 and the destinations
    begin
      logic [W-1:0] mn;
      int at;
      c = '0; c.op = OP_REDUCE; c.bank = 8'd0; c.col = 8'd3;
      c.dst_mask[0] = 1'b1; mn = src_row[0][3*W +: W]; at = 0;
      for (int d = 0; d < ND; d++) begin
        c.dst_mask[DST[d]] = 1'b1;
        if (dst_row[d][0][3*W +: W] < mn) begin mn = dst_row[d][0][3*W +: W]; at = DST[d]; end
      end
      host(c);
      chk(red_found && red_min == mn && int'(red_ch) == at / G && int'(red_bg) == at % G,
          $sformatf("reduce %0d at %0d/%0d exp %0d at %0d", red_min, red_ch, red_bg, mn, at));
    end
    c = '0; c.op = OP_PRE; c.dst_mask = MASK_W'({CG{1'b1}});
    host(c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
