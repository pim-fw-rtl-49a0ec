// fw_scheduler: the memory controller's command sequencer for blocked
// Floyd-Warshall.
//
// Given M, the number of B x B tiles per matrix row, it walks the blocked
// algorithm: for each pivot tile index kb, phase 1 updates the pivot tile
// A(kb,kb), phase 2 the tiles of pivot row kb and pivot column kb, phase 3
// all the others. Every tile update has the same form,
//     A(i,j)[r][c] = min(A(i,j)[r][c], A(i,kb)[r][p] + A(kb,j)[p][c])
// for p = 0..B-1 in order, so one command stream serves all three phases;
// only the set of destination tiles differs.
//
// Destination tiles are handled in rounds: round r holds tiles
// r*C*G .. r*C*G + C*G - 1 (in row-major tile order), which the interleaved
// mapping puts on distinct bank-groups and at the same DRAM row base, so
// all destinations of a round can be activated and computed with one
// command. For each pivot p of a round:
//   1. for each destination: open the row of A(kb,j) that holds tile row p,
//      broadcast it into the destination's pivot-row register (BCAST_KJ),
//      close it;
//   2. for each of the RPT DRAM rows R of the tiles:
//      a. for each destination: open row R of A(i,kb), broadcast the CPS
//         columns that hold tile column p for those tile rows into the
//         destination's data buffer (BCAST_IK), close it;
//      b. open row R in all destinations, issue SW MINPLUS commands (one per
//         tile row in the DRAM row, D_ik taken from data-buffer word s),
//         close the row.
// Sources are opened and closed one destination at a time, so a source
// bank-group that is also a destination (or holds two tiles) never needs
// two rows open.
//
// Handshake: the scheduler raises `cmd_valid` with `cmd`; the controller
// takes it with `cmd_accept` and pulses `cmd_ack` once the command has
// completed, after which the next command is presented. `done` pulses when
// the whole algorithm has finished.
//
// From the source: the three-phase blocked algorithm, the interleaved
// mapping, pivot data broadcast from the source bank-groups to the compute
// bank-group, BPEs doing the min-plus in the compute bank. The command
// order, the rounds and the open/close policy are this design's.
module fw_scheduler
  import pimfw_pkg::*;
#(
  parameter int unsigned C        = 8,
  parameter int unsigned G        = 4,
  parameter int unsigned NB       = 16,
  parameter int unsigned BPB      = 16,
  parameter int unsigned SW       = 16,
  parameter int unsigned W        = 32,
  parameter int unsigned COL_BITS = 256,
  localparam int unsigned CG      = C * G,
  localparam int unsigned B       = NB * BPB,          // tile width
  localparam int unsigned RPT     = B / SW,            // DRAM rows per tile
  localparam int unsigned CPS     = SW * W / COL_BITS  // columns per slice
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  logic [7:0] m,           // tiles per matrix row
  output logic      cmd_valid,
  output pim_cmd_t  cmd,
  input  logic      cmd_accept,
  input  logic      cmd_ack,
  output logic      busy,
  output logic      done
);
  typedef enum logic [3:0] {
    S_IDLE, S_ROUND, S_KJ_ACT, S_KJ_BC, S_KJ_PRE,
    S_IK_ACT, S_IK_BC, S_IK_PRE, S_MP_ACT, S_MP, S_MP_PRE
  } state_e;

  state_e      state;
  logic        pending;
  logic [7:0]  mm, kb, rnd, nrnd;
  logic [1:0]  ph;
  logic [15:0] kp;                       // pivot inside the tile
  logic [15:0] rr;                       // DRAM row inside the tile
  logic [15:0] sub;                      // MINPLUS slot / BCAST_IK column
  logic [$clog2(CG+1)-1:0] d;            // destination inside the round
  logic [CG-1:0] member;                 // destinations of this round and phase
  logic [CG-1:0] dst_all;                // their bank-groups

  // membership of the tiles of the current round in the current phase
  always_comb begin
    member  = '0;
    dst_all = '0;
    for (int e = 0; e < CG; e++) begin
      int unsigned t, ti, tj;
      t  = int'(rnd) * CG + e;
      ti = (mm != 0) ? t / int'(mm) : 0;
      tj = (mm != 0) ? t % int'(mm) : 0;
      if (t < int'(mm) * int'(mm)) begin
        unique case (ph)
          2'd1:    member[e] = (ti == int'(kb)) && (tj == int'(kb));
          2'd2:    member[e] = (ti == int'(kb)) != (tj == int'(kb));
          default: member[e] = (ti != int'(kb)) && (tj != int'(kb));
        endcase
      end
      // tile r*CG + e sits on bank-group (r*CG + e) mod CG = e
      dst_all[e] = member[e];
    end
  end

  function automatic logic [$clog2(CG+1)-1:0] first_from(input logic [CG-1:0] mk,
                                                         input int unsigned from);
    first_from = ($clog2(CG+1))'(CG);
    for (int e = CG - 1; e >= 0; e--)
      if (mk[e] && e >= int'(from)) first_from = ($clog2(CG+1))'(e);
  endfunction

  // current destination tile and its two source tiles
  logic [7:0] di, dj;
  logic [15:0] dt;
  logic [$clog2(CG+1)-1:0] g_kj, g_ik, g_d;
  logic [((C > 1) ? $clog2(C) : 1)-1:0] ch_kj, ch_ik, ch_d;
  logic [((G > 1) ? $clog2(G) : 1)-1:0] bg_kj, bg_ik, bg_d;
  logic [15:0] rb_kj, rb_ik, rb_d;

  always_comb begin
    dt = 16'(int'(rnd) * CG + int'(d));
    di = (mm != 0) ? 8'(dt / 16'(mm)) : 8'd0;
    dj = (mm != 0) ? 8'(dt % 16'(mm)) : 8'd0;
  end

  tile_mapper #(.C(C), .G(G), .RPT(RPT), .TW(8)) u_map_kj (
    .ti(kb), .tj(dj), .m(mm), .g(g_kj), .ch(ch_kj), .bg(bg_kj), .row_base(rb_kj));
  tile_mapper #(.C(C), .G(G), .RPT(RPT), .TW(8)) u_map_ik (
    .ti(di), .tj(kb), .m(mm), .g(g_ik), .ch(ch_ik), .bg(bg_ik), .row_base(rb_ik));
  tile_mapper #(.C(C), .G(G), .RPT(RPT), .TW(8)) u_map_d (
    .ti(di), .tj(dj), .m(mm), .g(g_d), .ch(ch_d), .bg(bg_d), .row_base(rb_d));

  // the command of the current state
  always_comb begin
    cmd          = '0;
    cmd.op       = OP_NOP;
    unique case (state)
      S_KJ_ACT: begin
        cmd.op = OP_ACT; cmd.dst_mask = MASK_W'(1) << g_kj;
        cmd.row = rb_kj + ROW_W'(kp / SW);
      end
      S_KJ_BC: begin
        cmd.op = OP_BCAST_KJ; cmd.dst_mask = MASK_W'(1) << g_d;
        cmd.src_ch = IDX_W'(ch_kj); cmd.src_bg = IDX_W'(bg_kj);
        cmd.slot = SLOT_W'(kp % SW);
      end
      S_KJ_PRE: begin cmd.op = OP_PRE; cmd.dst_mask = MASK_W'(1) << g_kj; end
      S_IK_ACT: begin
        cmd.op = OP_ACT; cmd.dst_mask = MASK_W'(1) << g_ik;
        cmd.row = rb_ik + rr;
      end
      S_IK_BC: begin
        cmd.op = OP_BCAST_IK; cmd.dst_mask = MASK_W'(1) << g_d;
        cmd.src_ch = IDX_W'(ch_ik); cmd.src_bg = IDX_W'(bg_ik);
        cmd.bank = IDX_W'(kp / BPB);
        cmd.col  = COLI_W'((int'(kp) % BPB) * CPS + sub);
        cmd.widx = WIDX_W'(sub);
      end
      S_IK_PRE: begin cmd.op = OP_PRE; cmd.dst_mask = MASK_W'(1) << g_ik; end
      S_MP_ACT: begin
        cmd.op = OP_ACT; cmd.dst_mask = MASK_W'(dst_all);
        cmd.row = ROW_W'(int'(rnd) * RPT) + rr;
      end
      S_MP: begin
        cmd.op = OP_MINPLUS; cmd.dst_mask = MASK_W'(dst_all);
        cmd.slot = SLOT_W'(sub); cmd.widx = WIDX_W'(sub);
      end
      S_MP_PRE: begin cmd.op = OP_PRE; cmd.dst_mask = MASK_W'(dst_all); end
      default: ;
    endcase
  end

  assign cmd_valid = !pending && !(state inside {S_IDLE, S_ROUND});
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pending <= 1'b0; done <= 1'b0;
      mm <= '0; kb <= '0; ph <= 2'd1; rnd <= '0; nrnd <= '0;
      kp <= '0; rr <= '0; sub <= '0; d <= '0;
    end else begin
      done <= 1'b0;
      if (cmd_valid && cmd_accept) pending <= 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          mm    <= m;
          nrnd  <= 8'((int'(m) * int'(m) + CG - 1) / CG);
          kb    <= '0; ph <= 2'd1; rnd <= '0;
          state <= (m == 0) ? S_IDLE : S_ROUND;
          done  <= (m == 0);
        end
        S_ROUND: begin
          if (member != '0) begin
            kp    <= '0;
            d     <= first_from(member, 0);
            state <= S_KJ_ACT;
          end else if (rnd + 1'b1 < nrnd) begin
            rnd <= rnd + 1'b1;
          end else begin
            rnd <= '0;
            if (ph != 2'd3) ph <= ph + 1'b1;
            else begin
              ph <= 2'd1;
              if (kb + 1'b1 < mm) kb <= kb + 1'b1;
              else begin state <= S_IDLE; done <= 1'b1; end
            end
          end
        end
        default: if (pending && cmd_ack) begin
          pending <= 1'b0;
          unique case (state)
            S_KJ_ACT: state <= S_KJ_BC;
            S_KJ_BC:  state <= S_KJ_PRE;
            S_KJ_PRE: begin
              if (first_from(member, int'(d) + 1) != ($clog2(CG+1))'(CG))
                begin d <= first_from(member, int'(d) + 1); state <= S_KJ_ACT; end
              else begin d <= first_from(member, 0); rr <= '0; state <= S_IK_ACT; end
            end
            S_IK_ACT: begin sub <= '0; state <= S_IK_BC; end
            S_IK_BC:
              if (int'(sub) == CPS - 1) state <= S_IK_PRE;
              else sub <= sub + 1'b1;
            S_IK_PRE: begin
              if (first_from(member, int'(d) + 1) != ($clog2(CG+1))'(CG))
                begin d <= first_from(member, int'(d) + 1); state <= S_IK_ACT; end
              else state <= S_MP_ACT;
            end
            S_MP_ACT: begin sub <= '0; state <= S_MP; end
            S_MP:
              if (int'(sub) == SW - 1) state <= S_MP_PRE;
              else sub <= sub + 1'b1;
            S_MP_PRE: begin
              d <= first_from(member, 0);
              if (int'(rr) < RPT - 1) begin rr <= rr + 1'b1; state <= S_IK_ACT; end
              else if (int'(kp) < B - 1) begin kp <= kp + 1'b1; state <= S_KJ_ACT; end
              else begin
                // round finished: move on to the next round / phase / pivot tile
                state <= S_ROUND;
                if (rnd + 1'b1 < nrnd) rnd <= rnd + 1'b1;
                else begin
                  rnd <= '0;
                  if (ph != 2'd3) ph <= ph + 1'b1;
                  else begin
                    ph <= 2'd1;
                    if (kb + 1'b1 < mm) kb <= kb + 1'b1;
                    else begin state <= S_IDLE; done <= 1'b1; end
                  end
                end
              end
            end
            default: state <= S_IDLE;
          endcase
        end
      endcase
    end
  end
endmodule
