// tb_pasm_accel: end-to-end test of the 16-PAS-4-MAC accelerator at its
// default size (w = 32, b = 16, 4 image lanes, 4 bin-index lanes, 4 MACs).
//
// It loads a table of 16 shared weights, then streams a series of dot-product
// operations and compares all 16 results of each with a direct weight-shared
// MAC computed in the testbench: sum over the stream of image[i] *
// weight[bin_index[j]] for PAS unit i*4 + j. The first operation is the worked
// example of the design description scaled by 10 (result 9876 for lane 0,
// index lane 0). Image values stay within 16 bits so that no 32-bit bin can
// overflow and the PASM result must equal the direct MAC result exactly.
//
// Mechanisms exercised and counted (each must occur): weight loads, accepted
// input beats, input gaps, input stalled by the multiply phase, MAC sharing
// (result groups 0..3 of each MAC), a one-beat operation, an operation whose
// first beat is accepted in the cycle the previous results come out, and a
// weight reload between operations. For gapless streams the last results
// must come n + 4*16 cycles after the first of n beats.
module tb_pasm_accel;
  import pasm_pkg::*;
  localparam int W = W_DEF, WCI = WCI_DEF, B = 2 ** WCI;
  localparam int NI = N_IMG_DEF, NK = N_KER_DEF, NM = N_MAC_DEF;
  localparam int NP = NI * NK, NG = NP / NM;
  localparam int NOPS = 24;

  logic clk = 0, rst_n = 0;
  logic w_we = 0;
  logic [WCI-1:0] w_addr = '0;
  logic signed [W-1:0] w_data = '0;
  logic in_valid = 0, in_last = 0, in_ready;
  logic [NI-1:0][W-1:0] image = '0;
  logic [NK-1:0][WCI-1:0] bin_index = '0;
  logic res_valid, done, busy;
  logic [1:0] res_grp;
  logic [NM-1:0][2*W-1:0] res;

  pasm_accel dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  longint signed weights [B];
  longint signed expv [NOPS][NP];
  int n_of [NOPS];
  int first_cyc [NOPS];
  bit gapless [NOPS];
  int res_op = 0;
  int grp_seen = 0;
  // mechanism counters
  int cnt_wload = 0, cnt_beats = 0, cnt_gaps = 0, cnt_stall = 0;
  int cnt_groups [NG];
  int cnt_one_beat = 0, cnt_b2b = 0, cnt_reload = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  task automatic load_weight(input int k, input longint signed v);
    @(negedge clk);
    w_we = 1; w_addr = k[WCI-1:0]; w_data = W'(v);
    weights[k] = v;
    @(negedge clk);
    w_we = 0;
    cnt_wload++;
  endtask

  // monitor: check every result group against the direct computation
  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && !in_ready) cnt_stall++;
      if (res_valid) begin
        check(int'(res_grp) == grp_seen, "result groups in order");
        cnt_groups[res_grp]++;
        for (int m = 0; m < NM; m++) begin
          int p;
          p = m * NG + int'(res_grp);
          check($signed(res[m]) == expv[res_op][p],
                $sformatf("op %0d PAS %0d: got %0d expected %0d", res_op, p,
                          $signed(res[m]), expv[res_op][p]));
        end
        grp_seen = (grp_seen + 1) % NG;
        check(done == (int'(res_grp) == NG - 1), "done with last group");
        if (done) begin
          if (gapless[res_op])
            check(cyc == first_cyc[res_op] + n_of[res_op] + NG * B,
                  $sformatf("op %0d latency %0d, expected %0d", res_op,
                            cyc - first_cyc[res_op], n_of[res_op] + NG * B));
          // next operation's first beat taken in this very cycle
          if (in_valid && in_ready) cnt_b2b++;
          res_op++;
        end
      end
    end
  end

  // stream one operation; image[l][t], idx[l][t] given in the arrays
  task automatic run_op(input int op, input int n, input bit gaps,
                        input int img [][NI], input int idx [][NK]);
    int t;
    n_of[op] = n;
    gapless[op] = !gaps;
    for (int p = 0; p < NP; p++) expv[op][p] = 0;
    for (t = 0; t < n; t++)
      for (int i = 0; i < NI; i++)
        for (int j = 0; j < NK; j++)
          expv[op][i * NK + j] += longint'(img[t][i]) * weights[idx[t][j]];
    if (n == 1) cnt_one_beat++;
    t = 0;
    while (t < n) begin
      @(negedge clk);
      if (gaps && t > 0 && $urandom_range(0, 3) == 0) begin
        in_valid = 0;
        cnt_gaps++;
        @(posedge clk);
        continue;
      end
      in_valid = 1;
      in_last = (t == n - 1);
      for (int i = 0; i < NI; i++) image[i] = W'(img[t][i]);
      for (int j = 0; j < NK; j++) bin_index[j] = WCI'(idx[t][j]);
      @(posedge clk);
      if (in_ready) begin
        if (t == 0) first_cyc[op] = cyc;
        t++;
        cnt_beats++;
      end
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
  endtask

  initial begin
    int img [][NI];
    int idx [][NK];
    int op;
    foreach (cnt_groups[g]) cnt_groups[g] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(!busy && in_ready, "idle after reset");

    // worked example, values x10: weights 1.7 0.4 1.3 2.0, image 26.7 3.4
    // 4.8 17.7 6.1 with indices 0 1 2 3 0 -> result 98.76
    load_weight(0, 17); load_weight(1, 4); load_weight(2, 13); load_weight(3, 20);
    for (int k = 4; k < B; k++) load_weight(k, $signed($urandom) >>> 1);
    img = new[5]; idx = new[5];
    begin
      int ex_img [5] = '{267, 34, 48, 177, 61};
      int ex_idx [5] = '{0, 1, 2, 3, 0};
      for (int t = 0; t < 5; t++) begin
        for (int i = 0; i < NI; i++) img[t][i] = (i == 0) ? ex_img[t] : $urandom_range(0, 1000);
        for (int j = 0; j < NK; j++) idx[t][j] = (j == 0) ? ex_idx[t] : $urandom_range(0, B - 1);
      end
    end
    run_op(0, 5, 0, img, idx);
    check(expv[0][0] == 9876, "worked example reference is 9876");
    wait (res_op == 1);

    // random operations
    op = 1;
    while (op < NOPS) begin
      int n;
      bit gaps, wait_done;
      case (op)
        1: n = 1;                                   // one-beat operation
        2: n = 800;                                 // 5x5 kernel, 32 channels
        default: n = $urandom_range(1, 120);
      endcase
      gaps = (op % 3 == 1) && (n > 1);
      wait_done = (op % 4 == 0);
      if (op == 12) begin                           // reload weights between operations
        wait (res_op == op);
        for (int k = 0; k < B; k++) load_weight(k, $signed($urandom) >>> 1);
        cnt_reload++;
      end
      img = new[n]; idx = new[n];
      for (int t = 0; t < n; t++) begin
        for (int i = 0; i < NI; i++) img[t][i] = $signed($urandom) >>> 16;
        for (int j = 0; j < NK; j++) idx[t][j] = $urandom_range(0, B - 1);
      end
      run_op(op, n, gaps, img, idx);
      // otherwise the next operation is offered at once and stalls
      if (wait_done) wait (res_op == op + 1);
      op++;
    end
    wait (res_op == NOPS);
    @(negedge clk);
    check(!busy, "idle at the end");

    check(cnt_wload > 0,     $sformatf("weight loads: %0d", cnt_wload));
    check(cnt_beats > 0,     $sformatf("accumulate beats: %0d", cnt_beats));
    check(cnt_gaps > 0,      $sformatf("input gaps: %0d", cnt_gaps));
    check(cnt_stall > 0,     $sformatf("stalled beats: %0d", cnt_stall));
    for (int g = 0; g < NG; g++)
      check(cnt_groups[g] == NOPS, $sformatf("MAC shared with group %0d: %0d times", g, cnt_groups[g]));
    check(cnt_one_beat > 0,  $sformatf("one-beat operations: %0d", cnt_one_beat));
    check(cnt_b2b > 0,       $sformatf("back-to-back starts: %0d", cnt_b2b));
    check(cnt_reload > 0,    $sformatf("weight reloads: %0d", cnt_reload));
    $display("mechanisms: wload=%0d beats=%0d gaps=%0d stalls=%0d one_beat=%0d b2b=%0d reload=%0d",
             cnt_wload, cnt_beats, cnt_gaps, cnt_stall, cnt_one_beat, cnt_b2b, cnt_reload);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
