// cpe: channel processing element, a pipelined minimum-finding tree.
//
// Takes N_IN candidate words (one per bank-group of a channel, or one per
// channel when used as the memory controller's global reduction), each with
// a valid bit, and returns the smallest valid word and the index of the
// input it came from (the lowest index on a tie). `out_found` is 0 when no
// input was valid.
//
// Each tree level is the same two-step unit as a bank PE's compare-and-
// select: a subtractor whose borrow says which operand is smaller, then a
// multiplexer, each in its own pipeline stage. The inputs are registered
// first. Latency from `in_valid` to `out_valid` is 1 + 2*ceil(log2(N_IN))
// clocks: 5 for the 4 bank-groups of a channel, 7 for 8 channels. The tree
// is fully pipelined and accepts a new set of inputs every clock.
//
// From the source: a channel-level engine that collects the bank-groups'
// local minima and finds the channel minimum with a comparison tree in about
// 5-10 cycles, built from the same subtractor-plus-multiplexer unit as the
// BPE. The source also calls that unit bit-serial; a bit-serial 32-bit
// compare cannot fit in 5-10 cycles, so each level here compares whole
// words in one clock. Tie-breaking and the index output are this design's.
module cpe #(
  parameter int unsigned W    = 32,
  parameter int unsigned N_IN = 4,
  localparam int unsigned LV  = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned P   = 1 << LV,
  localparam int unsigned IW  = LV
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [N_IN-1:0] in_mask,
  input  logic [W-1:0]  in_val [N_IN],
  output logic          out_valid,
  output logic          out_found,
  output logic [W-1:0]  out_min,
  output logic [IW-1:0] out_idx
);
  typedef struct packed {
    logic          v;
    logic [W-1:0]  d;
    logic [IW-1:0] idx;
  } node_t;

  // lvl[l] holds P >> l nodes; lvl[0] is the registered input row
  node_t       lvl   [LV+1][P];
  logic        vld   [LV+1];
  // first stage of each level: operands and the borrow of b - a
  node_t       pa    [LV][P/2];
  node_t       pb    [LV][P/2];
  logic        bor   [LV][P/2];
  logic        pvld  [LV];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld[0] <= 1'b0;
      for (int n = 0; n < P; n++) lvl[0][n] <= '0;
    end else begin
      vld[0] <= in_valid;
      for (int n = 0; n < P; n++)
        if (n < N_IN) lvl[0][n] <= '{v: in_mask[n], d: in_val[n], idx: IW'(n)};
        else          lvl[0][n] <= '0;
    end
  end

  for (genvar l = 0; l < LV; l++) begin : g_lvl
    localparam int unsigned NN = P >> (l + 1);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        pvld[l] <= 1'b0;
        vld[l+1] <= 1'b0;
        for (int n = 0; n < P/2; n++) begin
          pa[l][n] <= '0; pb[l][n] <= '0; bor[l][n] <= 1'b0;
        end
        for (int n = 0; n < P; n++) lvl[l+1][n] <= '0;
      end else begin
        // subtract stage
        pvld[l] <= vld[l];
        for (int n = 0; n < NN; n++) begin
          logic [W:0] diff;
          diff = {1'b0, lvl[l][2*n+1].d} - {1'b0, lvl[l][2*n].d};
          pa[l][n]  <= lvl[l][2*n];
          pb[l][n]  <= lvl[l][2*n+1];
          bor[l][n] <= diff[W];              // 1 when b < a
        end
        // select stage
        vld[l+1] <= pvld[l];
        for (int n = 0; n < NN; n++)
          lvl[l+1][n] <= (pa[l][n].v && (!pb[l][n].v || !bor[l][n])) ? pa[l][n] : pb[l][n];
      end
    end
  end

  assign out_valid = vld[LV];
  assign out_found = lvl[LV][0].v;
  assign out_min   = lvl[LV][0].d;
  assign out_idx   = lvl[LV][0].idx;
endmodule
