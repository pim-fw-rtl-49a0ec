// bpe: bank processing element, the in-bank min-plus unit.
//
// Computes D_new = min(D_ij, D_ik + D_kj) on W-bit unsigned distances, one
// bit per clock. A first bit-serial adder forms D_sum = D_ik + D_kj least
// significant bit first; each sum bit is fed at once into a second
// bit-serial cell run as a subtractor, D_sum - D_ij, so that the comparison
// finishes in the same W clocks. The sum bits are collected in a shift
// register, and a final multiplexer picks D_sum or D_ij. The carry out of
// the adder marks an overflowing sum, which never wins: with all-ones as
// infinity, INF + x never replaces D_ij.
//
// Interface: pulse `start` with the three operands valid; they are latched.
// `busy` is high for W clocks, then one clock later `done` pulses for one
// clock with `dnew` valid (held until the next start) and `took` = 1 when
// D_sum replaced D_ij. Latency from start to done: W+1 clocks (33 at W=32).
//
// From the source: the adder-then-compare-then-multiplexer structure, the
// 32-bit operands and the bit-serial arithmetic. This design's choices: LSB
// first order, overlapping the compare with the add, overflow handling and
// the start/done handshake.
module bpe #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dij,
  input  logic [W-1:0] dik,
  input  logic [W-1:0] dkj,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] dnew,
  output logic         took
);
  localparam int unsigned CW = $clog2(W + 1);

  logic [W-1:0]  a_sr, b_sr, c_sr, s_sr;
  logic [CW-1:0] cnt;
  logic          sel;          // the multiplexer clock
  logic          s_bit, s_cout, s_carry;
  logic          c_sum_unused, c_cout_unused, ge;

  bit_serial_adder #(.SUB(1'b0)) u_add (
    .clk, .rst_n, .clear(start), .en(busy),
    .a(a_sr[0]), .b(b_sr[0]), .sum(s_bit), .cout(s_cout), .carry(s_carry));

  // D_sum - D_ij: registered carry = 1 when the low W bits of D_sum >= D_ij
  bit_serial_adder #(.SUB(1'b1)) u_cmp (
    .clk, .rst_n, .clear(start), .en(busy),
    .a(s_bit), .b(c_sr[0]), .sum(c_sum_unused), .cout(c_cout_unused), .carry(ge));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_sr <= '0; b_sr <= '0; c_sr <= '0; s_sr <= '0;
      cnt  <= '0; busy <= 1'b0; sel <= 1'b0; done <= 1'b0;
      dnew <= '0; took <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        a_sr <= dik; b_sr <= dkj; c_sr <= dij;
        cnt  <= '0;  busy <= 1'b1; sel <= 1'b0;
      end else if (busy) begin
        a_sr <= a_sr >> 1;
        b_sr <= b_sr >> 1;
        c_sr <= {c_sr[0], c_sr[W-1:1]};      // rotates back to D_ij after W bits
        s_sr <= {s_bit, s_sr[W-1:1]};
        cnt  <= cnt + 1'b1;
        if (cnt == CW'(W - 1)) begin
          busy <= 1'b0;
          sel  <= 1'b1;
        end
      end else if (sel) begin
        sel  <= 1'b0;
        done <= 1'b1;
        took <= !s_carry && !ge;             // no overflow and D_sum < D_ij
        dnew <= (!s_carry && !ge) ? s_sr : c_sr;
      end
    end
  end
endmodule
