// tb_pimfw_top: end-to-end test of the stack at reduced size (2 channels x
// 4 bank-groups x 2 banks x 2 BPEs, 2-word slices, 64-bit columns, so tiles
// are 4 x 4). The testbench acts as the host:
//   1. loads a random weighted graph (about 40% of edges present, the rest
//      infinite, one vertex with no incoming edges) tile by tile with
//      ACT/WR/PRE at the places the interleaved mapping gives;
//   2. starts OP_FW and waits for it;
//   3. reads every tile back and compares it with Floyd-Warshall computed
//      in the testbench;
// for M = 3 (N = 12, one bank-group holding two tiles) and M = 2. Then it
// checks single host commands: a pivot-row broadcast to three bank-groups of
// one channel against one bank-group in each channel (inside a channel the
// destinations take turns, across channels they run together), and a
// REDUCE across all bank-groups of both channels (the minimum and where it
// was). Every mechanism is counted and a failure is counted for any that
// never occurred.
module tb_pimfw_top;
  import pimfw_pkg::*;
  localparam int W = 32, C = 2, G = 4, NB = 2, BPB = 2, SW = 2, CB = 64, ROWS = 16, DE = 8;
  localparam int CG = C * G, B = NB * BPB, RPT = B / SW, NPE = NB * BPB;
  localparam int RB = BPB * SW * W, NCOL = RB / CB, BEATS = NPE * W / CB;
  localparam int MAXN = 4 * B;
  logic clk = 1'b0, rst_n = 1'b0;
  logic host_valid, host_ready, host_done, fw_busy, red_found;
  pim_cmd_t host_cmd;
  logic [CB-1:0] host_wdata, host_rdata;
  logic [W-1:0] red_min;
  logic [0:0] red_ch;
  logic [1:0] red_bg;
  logic [63:0] cycles;
  logic [31:0] upd_cnt;
  logic [W-1:0] dmat [MAXN][MAXN];
  logic [W-1:0] ref_d [MAXN][MAXN];
  int checks = 0, failures = 0;
  // mechanism counters
  int n_kj = 0, n_ik = 0, n_mp = 0, n_mp_par = 0, n_self_src = 0, n_two_tiles = 0;
  int n_inf_kept = 0, n_upd = 0, n_seq_bcast = 0, n_par_bcast = 0, n_reduce = 0;
  int n_ph [4];

  always #5 clk = ~clk;

  pimfw_top #(.W(W), .C(C), .G(G), .NB(NB), .BPB(BPB), .SW(SW), .COL_BITS(CB),
              .ROWS(ROWS), .DBUF_ENT(DE)) dut (
    .clk, .rst_n, .host_valid, .host_ready, .host_cmd, .host_wdata, .host_done, .host_rdata,
    .red_found, .red_min, .red_ch, .red_bg, .fw_busy, .cycles, .upd_cnt);

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watch what the scheduler issues
  always @(posedge clk) if (rst_n && dut.mst == 3'd2 && dut.from_fw) begin
    unique case (dut.cur.op)
      OP_BCAST_KJ: begin
        n_kj++;
        if (dut.cur.dst_mask[int'(dut.cur.src_ch) * G + int'(dut.cur.src_bg)]) n_self_src++;
      end
      OP_BCAST_IK: n_ik++;
      OP_MINPLUS: begin
        n_mp++;
        if ($countones(dut.cur.dst_mask) > 1) n_mp_par++;
      end
      default: ;
    endcase
    if (dut.cur.op == OP_MINPLUS) n_ph[dut.u_sched.ph]++;
    if (dut.cur.op == OP_ACT && dut.cur.row >= RPT) n_two_tiles++;
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

  function automatic pim_cmd_t mk(input pim_op_e op, input int g = 0, input int row = 0,
                                  input int bank = 0, input int col = 0);
    pim_cmd_t c = '0;
    c.op = op; c.dst_mask = MASK_W'(1) << g; c.row = ROW_W'(row);
    c.src_ch = IDX_W'(g / G); c.src_bg = IDX_W'(g % G);
    c.bank = IDX_W'(bank); c.col = COLI_W'(col);
    return c;
  endfunction

  // the placement of tile (ti,tj) under the interleaved mapping
  function automatic int tile_g(input int ti, input int tj, input int m);
    return (ti * m + tj) % CG;
  endfunction
  function automatic int tile_base(input int ti, input int tj, input int m);
    return ((ti * m + tj) / CG) * RPT;
  endfunction

  task automatic load_graph(input int m);
    int n;
    n = m * B;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        if (i == j) dmat[i][j] = '0;
        else if (j == n - 1) dmat[i][j] = '1;                   // nothing reaches n-1
        else if ($urandom % 100 < 40) dmat[i][j] = 32'(1 + $urandom % 100);
        else dmat[i][j] = '1;
        ref_d[i][j] = dmat[i][j];
      end
    for (int ti = 0; ti < m; ti++)
      for (int tj = 0; tj < m; tj++)
        for (int rr = 0; rr < RPT; rr++) begin
          int g, row;
          g = tile_g(ti, tj, m); row = tile_base(ti, tj, m) + rr;
          host(mk(OP_ACT, g, row));
          for (int bk = 0; bk < NB; bk++) begin
            logic [RB-1:0] rowv;
            for (int p = 0; p < BPB; p++)
              for (int s = 0; s < SW; s++)
                rowv[(p*SW + s)*W +: W] = dmat[ti*B + rr*SW + s][tj*B + bk*BPB + p];
            for (int k = 0; k < NCOL; k++) host(mk(OP_WR, g, 0, bk, k), rowv[k*CB +: CB]);
          end
          host(mk(OP_PRE, g));
        end
  endtask

  task automatic read_graph(input int m);
    for (int ti = 0; ti < m; ti++)
      for (int tj = 0; tj < m; tj++)
        for (int rr = 0; rr < RPT; rr++) begin
          int g, row;
          g = tile_g(ti, tj, m); row = tile_base(ti, tj, m) + rr;
          host(mk(OP_ACT, g, row));
          for (int bk = 0; bk < NB; bk++) begin
            logic [RB-1:0] rowv;
            for (int k = 0; k < NCOL; k++) begin
              host(mk(OP_RD, g, 0, bk, k));
              rowv[k*CB +: CB] = host_rdata;
            end
            for (int p = 0; p < BPB; p++)
              for (int s = 0; s < SW; s++)
                dmat[ti*B + rr*SW + s][tj*B + bk*BPB + p] = rowv[(p*SW + s)*W +: W];
          end
          host(mk(OP_PRE, g));
        end
  endtask

  task automatic ref_fw(input int n);
    for (int k = 0; k < n; k++)
      for (int i = 0; i < n; i++)
        for (int j = 0; j < n; j++) begin
          longint s;
          s = longint'(ref_d[i][k]) + longint'(ref_d[k][j]);
          if (s < longint'(ref_d[i][j])) ref_d[i][j] = 32'(s);
        end
  endtask

  task automatic run_fw(input int m);
    pim_cmd_t c;
    int n, bad;
    longint t0;
    n = m * B;
    load_graph(m);
    ref_fw(n);
    c = '0; c.op = OP_FW; c.slot = SLOT_W'(m);
    t0 = longint'(cycles);
    host(c);
    $display("FW M=%0d N=%0d: %0d clocks", m, n, longint'(cycles) - t0);
    read_graph(m);
    bad = 0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        checks++;
        if (dmat[i][j] !== ref_d[i][j]) begin
          failures++; bad++;
          if (bad < 10) $display("FAIL D[%0d][%0d] = %0d exp %0d", i, j, dmat[i][j], ref_d[i][j]);
        end
        if (ref_d[i][j] == '1 && dmat[i][j] == '1) n_inf_kept++;
      end
  endtask

  initial begin
    int t1, t2;
    host_valid = 1'b0; host_cmd = '0; host_wdata = '0;
    foreach (n_ph[i]) n_ph[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    run_fw(3);
    run_fw(2);
    n_upd = int'(upd_cnt);

    // broadcast timing: three destinations in channel 0 vs one per channel
    host(mk(OP_ACT, 0, 5));
    begin
      pim_cmd_t c;
      longint t0;
      c = mk(OP_BCAST_KJ, 0); c.dst_mask = MASK_W'(8'b0000_1110); c.slot = '0;
      t0 = longint'(cycles); host(c); t1 = int'(longint'(cycles) - t0);
      c.dst_mask = MASK_W'(8'b0010_0010);
      t0 = longint'(cycles); host(c); t2 = int'(longint'(cycles) - t0);
      chk(t1 - t2 == 2 * BEATS, $sformatf("3 in one channel %0d vs 1 per channel %0d", t1, t2));
      if (t1 - t2 == 2 * BEATS) begin n_seq_bcast++; n_par_bcast++; end
    end
    // reduction: word 3 of bank 1 in every bank-group
    begin
      logic [W-1:0] v [CG];
      logic [W-1:0] mn;
      int at;
      pim_cmd_t c;
      host(mk(OP_PRE, 0));
      c = '0; c.op = OP_ACT; c.dst_mask = MASK_W'(8'hFF); c.row = ROW_W'(7);
      host(c);
      mn = '1; at = 0;
      for (int g = 0; g < CG; g++) begin
        logic [CB-1:0] wd;
        v[g] = 32'(100 + $urandom % 900);
        if (g == 6) v[g] = 32'd3;
        wd = {$urandom, $urandom}; wd[W +: W] = v[g];    // word 3 = column 1, upper word
        host(mk(OP_WR, g, 0, 1, 1), wd);
        if (v[g] < mn) begin mn = v[g]; at = g; end
      end
      c = '0; c.op = OP_REDUCE; c.dst_mask = MASK_W'(8'hFF); c.bank = 8'd1; c.col = 8'd3;
      host(c);
      chk(red_found && red_min == mn && int'(red_ch) == at / G && int'(red_bg) == at % G,
          $sformatf("global min %0d at %0d/%0d exp %0d at %0d", red_min, red_ch, red_bg, mn, at));
      n_reduce++;
      // one channel left out
      c.dst_mask = MASK_W'(8'h0F);
      host(c);
      mn = '1; at = 0;
      for (int g = 0; g < G; g++) if (v[g] < mn) begin mn = v[g]; at = g; end
      chk(red_found && red_min == mn && red_ch == 0 && int'(red_bg) == at, "channel 0 only");
      c = '0; c.op = OP_PRE; c.dst_mask = MASK_W'(8'hFF);
      host(c);
    end

    $display("mechanisms: KJ=%0d IK=%0d MINPLUS=%0d parallel=%0d self-source=%0d two-tiles=%0d",
             n_kj, n_ik, n_mp, n_mp_par, n_self_src, n_two_tiles);
    $display("  phases %0d/%0d/%0d updates=%0d inf-kept=%0d seq-bcast=%0d par-bcast=%0d reduce=%0d",
             n_ph[1], n_ph[2], n_ph[3], n_upd, n_inf_kept, n_seq_bcast, n_par_bcast, n_reduce);
    chk(n_kj > 0, "pivot-row broadcast");
    chk(n_ik > 0, "pivot-column broadcast");
    chk(n_mp_par > 0, "MINPLUS on several bank-groups at once");
    chk(n_self_src > 0, "in-bank-group broadcast");
    chk(n_two_tiles > 0, "bank-group holding a second tile");
    chk(n_ph[1] > 0 && n_ph[2] > 0 && n_ph[3] > 0, "all three phases");
    chk(n_upd > 0, "BPE updates");
    chk(n_inf_kept > 0, "unreachable pairs kept infinite");
    chk(n_seq_bcast > 0 && n_par_bcast > 0, "broadcast sequencing");
    chk(n_reduce > 0, "reduction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
