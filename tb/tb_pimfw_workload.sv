// tb_pimfw_workload: the evaluated graph workloads, shrunk to a size that
// simulates in seconds. The stack is reduced to 2 channels x 4 bank-groups
// x 2 banks x 2 BPEs (tiles of 4 x 4), so the tile grids keep the shape of
// the real runs while the tiles shrink:
//   * a road-network-like graph: a 4 x 4 lattice of junctions with two-way
//     roads of random length, on an M = 4 tile grid (the grid of a
//     1000-node graph with 256-wide tiles), two tiles per bank-group;
//   * a padded graph: 18 real vertices padded to N = 20 (M = 5) the way a
//     graph whose size is not a multiple of the tile width is padded
//     (padding vertices: 0 to themselves, unreachable otherwise), giving 25
//     tiles on 8 bank-groups, four rounds of which the last is partial;
//   * a graph with weights near 2^30, so that many path sums overflow 32
//     bits and must lose the compare.
// Each is loaded tile by tile at the interleaved mapping's places, solved
// with OP_FW and read back; every distance is compared with Floyd-Warshall
// computed here with 64-bit sums. The run counts the mechanisms these
// workloads exercise (padding kept unreachable, overflowing sums, partial
// rounds, bank-groups holding several tiles) and fails for any that never
// happened.
module tb_pimfw_workload;
  import pimfw_pkg::*;
  localparam int W = 32, C = 2, G = 4, NB = 2, BPB = 2, SW = 2, CB = 64, ROWS = 16, DE = 8;
  localparam int CG = C * G, B = NB * BPB, RPT = B / SW, NPE = NB * BPB;
  localparam int RB = BPB * SW * W, NCOL = RB / CB;
  localparam int MAXN = 5 * B;
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
  int n_pad_kept = 0, n_ovf = 0, n_partial = 0, n_multi_tile = 0, n_road_paths = 0;

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

  // a MINPLUS with fewer destinations than bank-groups is a partial round
  always @(posedge clk) if (rst_n && dut.mst == 3'd2 && dut.from_fw) begin
    if (dut.cur.op == OP_MINPLUS && $countones(dut.cur.dst_mask) < CG) n_partial++;
    if (dut.cur.op == OP_ACT && dut.cur.row >= 2 * RPT) n_multi_tile++;
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

  task automatic store_graph(input int m);
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

  task automatic clear_graph(input int n);
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) dmat[i][j] = (i == j) ? '0 : '1;
  endtask

  // reference Floyd-Warshall with 64-bit sums; a sum of two finite
  // distances that does not fit in 32 bits is counted as an overflow
  task automatic ref_fw(input int n);
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) ref_d[i][j] = dmat[i][j];
    for (int k = 0; k < n; k++)
      for (int i = 0; i < n; i++)
        for (int j = 0; j < n; j++) begin
          longint s;
          s = longint'(ref_d[i][k]) + longint'(ref_d[k][j]);
          if (ref_d[i][k] != '1 && ref_d[k][j] != '1 && s >= 64'h1_0000_0000) n_ovf++;
          if (s < longint'(ref_d[i][j])) ref_d[i][j] = 32'(s);
        end
  endtask

  task automatic run_case(input string name, input int m, input int n_real);
    pim_cmd_t c;
    int n, bad;
    longint t0;
    n = m * B;
    ref_fw(n);
    store_graph(m);
    c = '0; c.op = OP_FW; c.slot = SLOT_W'(m);
    t0 = longint'(cycles);
    host(c);
    $display("%s: M=%0d N=%0d, %0d clocks", name, m, n, longint'(cycles) - t0);
    read_graph(m);
    bad = 0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        checks++;
        if (dmat[i][j] !== ref_d[i][j]) begin
          failures++; bad++;
          if (bad < 10) $display("FAIL %s D[%0d][%0d] = %0d exp %0d", name, i, j, dmat[i][j], ref_d[i][j]);
        end
        if ((i >= n_real || j >= n_real) && i != j && dmat[i][j] == '1) n_pad_kept++;
      end
  endtask

  task automatic mech(input bit ok, input string what, input int n);
    checks++;
    $display("%-32s %0d", what, n);
    if (!ok) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    int n, side, v;
    host_valid = 1'b0; host_cmd = '0; host_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // road lattice, 16 junctions, M = 4
    n = 4 * B; side = 4;
    clear_graph(n);
    for (int y = 0; y < side; y++)
      for (int x = 0; x < side; x++) begin
        v = y * side + x;
        if (x + 1 < side) begin
          dmat[v][v + 1] = 32'(1 + $urandom % 50); dmat[v + 1][v] = 32'(1 + $urandom % 50);
        end
        if (y + 1 < side) begin
          dmat[v][v + side] = 32'(1 + $urandom % 50); dmat[v + side][v] = 32'(1 + $urandom % 50);
        end
      end
    run_case("road lattice", 4, n);
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++)
        if (i != j && ref_d[i][j] != '1) n_road_paths++;
    chk(n_road_paths == n * (n - 1), "lattice not fully connected");

    // padded random graph, 18 real vertices in N = 20
    n = 5 * B;
    clear_graph(n);
    for (int i = 0; i < 18; i++)
      for (int j = 0; j < 18; j++)
        if (i != j && $urandom % 100 < 25) dmat[i][j] = 32'(1 + $urandom % 200);
    run_case("padded graph", 5, 18);

    // heavy weights near 2^30: long paths overflow 32 bits
    n = 3 * B;
    clear_graph(n);
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++)
        if (i != j && $urandom % 100 < 50) dmat[i][j] = 32'h3000_0000 + ($urandom % 32'h1000_0000);
    run_case("heavy weights", 3, n);

    mech(n_road_paths > 0, "road paths found", n_road_paths);
    mech(n_pad_kept > 0, "padding kept unreachable", n_pad_kept);
    mech(n_ovf > 0, "overflowing sums", n_ovf);
    mech(n_partial > 0, "partial-round MINPLUS", n_partial);
    mech(n_multi_tile > 0, "third or later tile of a bg", n_multi_tile);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
