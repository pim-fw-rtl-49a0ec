// tb_cpe: feeds the channel PE's comparison tree random candidate sets with
// random valid masks, one set per clock (back to back), and compares the
// minimum, its input index (lowest on ties) and the found flag with a
// reference computed in the testbench; checks the 5-clock latency.
module tb_cpe;
  localparam int W = 32, N = 4, LAT = 5, NSETS = 300;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid;
  logic [N-1:0] in_mask;
  logic [W-1:0] in_val [N];
  logic out_valid, out_found;
  logic [W-1:0] out_min;
  logic [1:0] out_idx;
  logic [W-1:0] exp_min [NSETS];
  int   exp_idx [NSETS];
  bit   exp_found [NSETS];
  int   issue_cyc [NSETS];
  int   checks = 0, failures = 0, nout = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  cpe #(.W(W), .N_IN(N)) dut (.clk, .rst_n, .in_valid, .in_mask, .in_val,
    .out_valid, .out_found, .out_min, .out_idx);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (out_found !== exp_found[nout] ||
        (exp_found[nout] && (out_min !== exp_min[nout] || int'(out_idx) != exp_idx[nout]))) begin
      failures++;
      $display("set %0d: got %b %h %0d exp %b %h %0d", nout, out_found, out_min, out_idx,
               exp_found[nout], exp_min[nout], exp_idx[nout]);
    end
    checks++;
    if (cyc - issue_cyc[nout] != LAT) begin failures++; $display("latency %0d", cyc - issue_cyc[nout]); end
    nout++;
  end

  initial begin
    in_valid = 1'b0; in_mask = '0;
    for (int i = 0; i < N; i++) in_val[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < NSETS; s++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_mask = (s % 7 == 0) ? 4'b0000 : 4'($urandom);
      for (int i = 0; i < N; i++) in_val[i] = (s % 5 == 0) ? 32'($urandom % 4) : $urandom;
      exp_found[s] = 1'b0; exp_min[s] = '1; exp_idx[s] = 0;
      for (int i = 0; i < N; i++)
        if (in_mask[i] && (!exp_found[s] || in_val[i] < exp_min[s])) begin
          exp_found[s] = 1'b1; exp_min[s] = in_val[i]; exp_idx[s] = i;
        end
      issue_cyc[s] = cyc + 1;
    end
    @(negedge clk); in_valid = 1'b0;
    repeat (20) @(negedge clk);
    checks++; if (nout != NSETS) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
