// tb_bit_serial_adder: drives random word pairs through an adding and a
// subtracting bit-serial cell, LSB first, and compares every sum bit and the
// final carry with a + b and a - b computed on whole words.
module tb_bit_serial_adder;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clear, en, a, b;
  logic s_add, co_add, c_add, s_sub, co_sub, c_sub;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  bit_serial_adder #(.SUB(1'b0)) u_add (.clk, .rst_n, .clear, .en, .a, .b,
    .sum(s_add), .cout(co_add), .carry(c_add));
  bit_serial_adder #(.SUB(1'b1)) u_sub (.clk, .rst_n, .clear, .en, .a, .b,
    .sum(s_sub), .cout(co_sub), .carry(c_sub));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_pair(input logic [31:0] x, input logic [31:0] y);
    logic [32:0] sum_ref, dif_ref;
    logic [31:0] sa, ss;
    sum_ref = {1'b0, x} + {1'b0, y};
    dif_ref = {1'b0, x} + {1'b0, ~y} + 33'd1;    // carry = 1 when x >= y
    @(negedge clk); clear = 1'b1; en = 1'b0;
    @(negedge clk); clear = 1'b0;
    for (int i = 0; i < 32; i++) begin
      a = x[i]; b = y[i]; en = 1'b1;
      #1; sa[i] = s_add; ss[i] = s_sub;
      @(negedge clk);
    end
    en = 1'b0;
    checks++; if (sa !== sum_ref[31:0]) begin failures++; $display("add %h+%h got %h", x, y, sa); end
    checks++; if (c_add !== sum_ref[32]) begin failures++; $display("add carry %h+%h", x, y); end
    checks++; if (ss !== dif_ref[31:0]) begin failures++; $display("sub %h-%h got %h", x, y, ss); end
    checks++; if (c_sub !== dif_ref[32]) begin failures++; $display("sub carry %h-%h", x, y); end
  endtask

  initial begin
    clear = 1'b0; en = 1'b0; a = 1'b0; b = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run_pair(32'hFFFF_FFFF, 32'h1);
    run_pair(32'h5, 32'h5);
    run_pair(32'h0, 32'h1);
    for (int n = 0; n < 100; n++) run_pair($urandom, $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
