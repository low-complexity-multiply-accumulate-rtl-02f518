// tb_pasm_workloads: runs the accelerator in the configurations and on the
// stream lengths the design is evaluated with.
//  * the default w = 32, b = 16 accelerator on all twelve k*k*c dot-product
//    lengths of 1x1, 3x3, 5x5 and 7x7 kernels over 32, 128 and 512 input
//    channels (32 to 25088 inputs per dot product);
//  * the width sweep w = 4, 8, 16 with b = 16 bins;
//  * the bin sweep b = 4, 64, 256 with w = 32.
// Each configuration is one pasm_case_runner; all run in parallel and every
// result is checked there. The narrow widths overflow their bins on random
// data, which the runner models and counts; at least one overflow and at
// least one overflow-free comparison with the direct MAC must occur.
module tb_pasm_workloads;
  localparam int NC = 7;
  logic clk = 0, rst_n = 0;
  logic fin [NC];
  int ch [NC], fl [NC], ov [NC];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pasm_case_runner #(.W(32), .WCI(4), .TABLE2(1'b1)) c_tab (clk, rst_n, fin[0], ch[0], fl[0], ov[0]);
  pasm_case_runner #(.W(4),  .WCI(4)) c_w4   (clk, rst_n, fin[1], ch[1], fl[1], ov[1]);
  pasm_case_runner #(.W(8),  .WCI(4)) c_w8   (clk, rst_n, fin[2], ch[2], fl[2], ov[2]);
  pasm_case_runner #(.W(16), .WCI(4)) c_w16  (clk, rst_n, fin[3], ch[3], fl[3], ov[3]);
  pasm_case_runner #(.W(32), .WCI(2)) c_b4   (clk, rst_n, fin[4], ch[4], fl[4], ov[4]);
  pasm_case_runner #(.W(32), .WCI(6)) c_b64  (clk, rst_n, fin[5], ch[5], fl[5], ov[5]);
  pasm_case_runner #(.W(32), .WCI(8)) c_b256 (clk, rst_n, fin[6], ch[6], fl[6], ov[6]);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tot_ov;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NC; c++) wait (fin[c]);
    tot_ov = 0;
    for (int c = 0; c < NC; c++) begin
      $display("case %0d: checks=%0d failures=%0d bin overflows=%0d", c, ch[c], fl[c], ov[c]);
      checks += ch[c];
      failures += fl[c];
      tot_ov += ov[c];
      checks++;
      if (ch[c] == 0) begin failures++; $display("FAIL case %0d checked nothing", c); end
    end
    checks++;
    if (tot_ov == 0) begin failures++; $display("FAIL no bin overflow exercised"); end
    checks++;
    if (ov[0] != 0) begin failures++; $display("FAIL overflow in the 16-bit image table run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
