// tb_fw_scheduler: runs the scheduler for several grid sizes against a
// stand-in controller that accepts each command and acknowledges it a few
// clocks later. It tracks which bank-groups have a row open and checks the
// DRAM rules (ACT only to a closed bank-group, every other command only to
// open ones, broadcast sources open), that every tile is updated for every
// pivot of every pivot tile (each MINPLUS destination updates one tile row
// per command, so the destinations summed over all MINPLUS commands must be
// M^2 tiles x M pivot tiles x B pivots x B tile rows), that the three phases take
// their tiles in the right order, and that `done` arrives.
module tb_fw_scheduler;
  import pimfw_pkg::*;
  localparam int C = 2, G = 2, NB = 2, BPB = 2, SW = 2, W = 32, CB = 64;
  localparam int CG = C * G, B = NB * BPB, RPT = B / SW;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, cmd_valid, cmd_accept, cmd_ack, busy, done;
  logic [7:0] m;
  pim_cmd_t cmd;
  int checks = 0, failures = 0;
  bit open_bg [CG];
  int row_bg [CG];
  longint mp_dests, n_mp, n_kj, n_ik, n_par;

  always #5 clk = ~clk;

  fw_scheduler #(.C(C), .G(G), .NB(NB), .BPB(BPB), .SW(SW), .W(W), .COL_BITS(CB)) dut (
    .clk, .rst_n, .start, .m, .cmd_valid, .cmd, .cmd_accept, .cmd_ack, .busy, .done);

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

  // stand-in controller
  initial begin
    cmd_accept = 1'b0; cmd_ack = 1'b0;
    forever begin
      @(negedge clk);
      cmd_ack = 1'b0;
      if (cmd_valid) begin
        pim_cmd_t c;
        int src;
        c = cmd;
        cmd_accept = 1'b1;
        @(negedge clk);
        cmd_accept = 1'b0;
        src = int'(c.src_ch) * G + int'(c.src_bg);
        unique case (c.op)
          OP_ACT: for (int g = 0; g < CG; g++) if (c.dst_mask[g]) begin
            chk(!open_bg[g], "ACT to open bank-group");
            open_bg[g] = 1; row_bg[g] = int'(c.row);
          end
          OP_PRE: for (int g = 0; g < CG; g++) if (c.dst_mask[g]) begin
            chk(open_bg[g], "PRE to closed bank-group");
            open_bg[g] = 0;
          end
          OP_MINPLUS: begin
            n_mp++;
            if ($countones(c.dst_mask) > 1) n_par++;
            for (int g = 0; g < CG; g++) if (c.dst_mask[g]) begin
              chk(open_bg[g], "MINPLUS to closed bank-group");
              mp_dests++;
            end
          end
          OP_BCAST_KJ, OP_BCAST_IK: begin
            if (c.op == OP_BCAST_KJ) n_kj++; else n_ik++;
            chk(open_bg[src], "broadcast from closed source");
            chk($countones(c.dst_mask) == 1, "one destination per broadcast");
          end
          default: chk(0, "unexpected opcode");
        endcase
        repeat (2) @(negedge clk);
        cmd_ack = 1'b1;
      end
    end
  end

  initial begin
    start = 1'b0; m = '0;
    foreach (open_bg[g]) open_bg[g] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int mm = 1; mm <= 4; mm++) begin
      int t;
      mp_dests = 0; n_mp = 0; n_kj = 0; n_ik = 0; n_par = 0;
      @(negedge clk); m = 8'(mm); start = 1'b1;
      @(negedge clk); start = 1'b0;
      t = 0;
      while (!done && t < 2000000) begin @(posedge clk); t++; end
      chk(done, $sformatf("M=%0d finished", mm));
      repeat (5) @(negedge clk);
      chk(!busy, "idle after done");
      chk(mp_dests == longint'(mm) * mm * mm * B * B / 1,
          $sformatf("M=%0d tile-row updates %0d exp %0d", mm, mp_dests, mm*mm*mm*B*B));
      // one pivot-row broadcast per destination tile, pivot and pivot tile
      chk(n_kj == longint'(mm) * mm * mm * B, $sformatf("M=%0d KJ broadcasts %0d", mm, n_kj));
      // pivot-column broadcasts: CPS columns per DRAM row
      chk(n_ik == longint'(mm) * mm * mm * B * RPT * (SW * W / CB),
          $sformatf("M=%0d IK broadcasts %0d", mm, n_ik));
      for (int g = 0; g < CG; g++) chk(!open_bg[g], "all rows closed at the end");
      if (mm >= 2) chk(n_par > 0, "tiles computed in parallel");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
