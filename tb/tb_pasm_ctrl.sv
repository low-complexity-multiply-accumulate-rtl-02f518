// tb_pasm_ctrl: self-checking test of the phase sequencer.
// For streams of random length with random input gaps it checks cycle by
// cycle: in_ready is high outside phase 2 and low inside it; acc_first marks
// only the first accepted beat; phase 2 starts right after the last beat and
// visits bin 0..B-1 of group 0..NGRP-1 in order, with mul_first on bin 0; a
// result strobe follows each group with the right group number; done comes
// with the last group, n + NGRP*B cycles after the first of n gapless beats
// (gaps in the input stream add their own length).
module tb_pasm_ctrl;
  import pasm_pkg::*;
  localparam int WCI = 4, NGRP = 4, B = 2 ** WCI, GW = 2;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0, in_ready;
  logic acc_en, acc_first, mul_en, mul_first, res_valid, done;
  logic [WCI-1:0] bin_sel;
  logic [GW-1:0] grp_sel, res_grp;
  pasm_state_e state;
  int checks = 0, failures = 0;

  pasm_ctrl #(.WCI(WCI), .NGRP(NGRP)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 40; op++) begin
      int n, sent, cyc, first_cyc, p1;
      n = (op == 0) ? 1 : $urandom_range(1, 50);
      sent = 0; cyc = 0; first_cyc = -1;
      // phase 1
      while (sent < n) begin
        @(negedge clk);
        // even operations stream without gaps, odd ones with random gaps
        in_valid = (op % 2 == 0) || (sent > 0 && $urandom_range(0, 2) != 0) || (sent == 0);
        in_last  = in_valid && (sent == n - 1);
        #1;
        expect_true(in_ready && !mul_en, "ready in phase 1");
        expect_true(acc_en == in_valid, "acc_en");
        expect_true(acc_first == (in_valid && sent == 0), "acc_first");
        if (in_valid) begin
          if (sent == 0) first_cyc = cyc;
          sent++;
        end
        if (first_cyc >= 0) cyc++;
        else cyc = 0;
      end
      p1 = cyc;
      if (op % 2 == 0) expect_true(p1 == n, "gapless phase 1 takes n cycles");
      // phase 2: offer input all the time, it must be stalled
      for (int g = 0; g < NGRP; g++) begin
        for (int k = 0; k < B; k++) begin
          @(negedge clk);
          in_valid = 1; in_last = 0;
          #1;
          expect_true(!in_ready && !acc_en, "stall in phase 2");
          expect_true(mul_en && bin_sel == k[WCI-1:0] && grp_sel == g[GW-1:0], "bin/group order");
          expect_true(mul_first == (k == 0), "mul_first");
          expect_true(res_valid == (g > 0 && k == 0), "res_valid inside phase 2");
          if (g > 0 && k == 0) expect_true(res_grp == GW'(g - 1), "res_grp");
          cyc++;
        end
      end
      @(negedge clk);
      in_valid = 0;
      #1;
      expect_true(res_valid && res_grp == GW'(NGRP - 1) && done, "last result strobe");
      expect_true(cyc == p1 + NGRP * B, $sformatf("latency %0d vs %0d", cyc, p1 + NGRP * B));
      expect_true(state == ST_IDLE && in_ready, "idle after operation");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
