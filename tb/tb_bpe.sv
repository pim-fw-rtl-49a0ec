// tb_bpe: checks the bank PE against min(D_ij, D_ik + D_kj) with the sum
// taken exactly (33 bits), on random operands, on ties, on overflowing sums
// and with the all-ones "infinity"; also checks that done comes W+1 clocks
// after start and that `took` says whether the sum won.
module tb_bpe;
  localparam int W = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start;
  logic [W-1:0] dij, dik, dkj, dnew;
  logic busy, done, took;
  int checks = 0, failures = 0, n_took = 0, n_keep = 0;

  always #5 clk = ~clk;

  bpe #(.W(W)) dut (.clk, .rst_n, .start, .dij, .dik, .dkj, .busy, .done, .dnew, .took);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input logic [W-1:0] ij, input logic [W-1:0] ik, input logic [W-1:0] kj);
    logic [W:0] s;
    logic [W-1:0] exp_v;
    logic exp_t;
    int lat;
    s = {1'b0, ik} + {1'b0, kj};
    exp_t = (s < {1'b0, ij});
    exp_v = exp_t ? s[W-1:0] : ij;
    @(negedge clk);
    dij = ij; dik = ik; dkj = kj; start = 1'b1;
    @(negedge clk);
    start = 1'b0; dij = $urandom; dik = $urandom; dkj = $urandom;   // operands must be latched
    lat = 1;
    while (!done && lat < 100) begin @(negedge clk); lat++; end
    // lat counts clocks after the one that sampled start: done rises W+1 clocks later
    checks++; if (lat != W + 2) begin failures++; $display("latency %0d", lat); end
    checks++; if (dnew !== exp_v) begin failures++; $display("min(%h,%h+%h) got %h exp %h", ij, ik, kj, dnew, exp_v); end
    checks++; if (took !== exp_t) begin failures++; $display("took %b exp %b", took, exp_t); end
    if (exp_t) n_took++; else n_keep++;
  endtask

  initial begin
    start = 1'b0; dij = '0; dik = '0; dkj = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    one(32'd100, 32'd30, 32'd40);            // 70 wins
    one(32'd70,  32'd30, 32'd40);            // tie keeps D_ij
    one(32'd69,  32'd30, 32'd40);
    one('1, 32'd5, 32'd6);                   // INF replaced
    one(32'd9, '1, 32'd6);                   // INF + x never wins
    one('1, '1, '1);
    one(32'hFFFF_FFFE, 32'h8000_0000, 32'h7FFF_FFFD);
    one(32'h1000, 32'hFFFF_0000, 32'h0002_0000); // overflowing sum
    for (int n = 0; n < 200; n++) one($urandom, $urandom >> ($urandom % 32), $urandom >> ($urandom % 32));
    checks++; if (n_took == 0 || n_keep == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
