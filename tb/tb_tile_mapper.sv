// tb_tile_mapper: checks the interleaved mapping for every tile of grids
// with M = 1..20 tiles per row: bank-group (i*M+j) mod (C*G), its split into
// channel and bank-group, the row base, and that no two tiles share a
// bank-group and a row base.
module tb_tile_mapper;
  localparam int C = 8, G = 4, RPT = 16;
  logic [7:0] ti, tj, m;
  logic [5:0] g;
  logic [2:0] ch;
  logic [1:0] bg;
  logic [15:0] rb;
  int checks = 0, failures = 0;
  bit used [C*G][64];

  tile_mapper #(.C(C), .G(G), .RPT(RPT), .TW(8)) dut (.ti, .tj, .m, .g, .ch, .bg, .row_base(rb));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int mm = 1; mm <= 20; mm++) begin
      foreach (used[a, b]) used[a][b] = 1'b0;
      for (int i = 0; i < mm; i++)
        for (int j = 0; j < mm; j++) begin
          int lin;
          ti = 8'(i); tj = 8'(j); m = 8'(mm);
          #1;
          lin = i * mm + j;
          checks++;
          if (int'(g) != lin % (C*G) || int'(ch) != (lin % (C*G)) / G ||
              int'(bg) != lin % G || int'(rb) != (lin / (C*G)) * RPT) begin
            failures++;
            $display("M=%0d (%0d,%0d): g=%0d ch=%0d bg=%0d rb=%0d", mm, i, j, g, ch, bg, rb);
          end
          checks++;
          if (used[g][rb / RPT]) begin failures++; $display("collision M=%0d (%0d,%0d)", mm, i, j); end
          used[g][rb / RPT] = 1'b1;
        end
    end
    // the source's example: A00..A03 of a 4x4 grid on bank-groups 1..4 of one channel
    m = 8'd4; ti = 8'd0;
    for (int j = 0; j < 4; j++) begin
      tj = 8'(j); #1;
      checks++; if (ch != 0 || int'(bg) != j) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
