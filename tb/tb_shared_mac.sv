// tb_shared_mac: self-checking test of the post-pass multiply-accumulate unit.
// Replays the phase-2 example of the design description scaled by 10
// (bins 328, 34, 48, 177 times weights 17, 4, 13, 20 must give 9876, i.e.
// 98.76), then random signed dot products of random length, with hold cycles
// (en low) in between, checked against a 64-bit software sum.
module tb_shared_mac;
  localparam int W = 32;

  logic clk = 0, rst_n = 0;
  logic en = 0, first = 0;
  logic signed [W-1:0] a = '0, b = '0;
  logic signed [2*W-1:0] result;
  int checks = 0, failures = 0;

  shared_mac #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic signed [2*W-1:0] exp, input string what);
    checks++;
    if (result !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, result, exp);
    end
  endtask

  initial begin
    int signed ex_bin [4] = '{328, 34, 48, 177};
    int signed ex_w   [4] = '{17, 4, 13, 20};
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 check('0, "reset");
    for (int k = 0; k < 4; k++) begin
      @(negedge clk); en = 1; first = (k == 0); a = ex_bin[k]; b = ex_w[k];
    end
    @(negedge clk); en = 0; first = 0;
    check(64'sd9876, "example 98.76");
    // hold: en low keeps the result
    @(negedge clk); a = 123; b = 456;
    @(negedge clk);
    check(64'sd9876, "hold");
    for (int op = 0; op < 200; op++) begin
      longint signed sum;
      int n;
      sum = 0;
      n = $urandom_range(1, 40);
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        en = 1; first = (k == 0);
        a = $signed($urandom); b = $signed($urandom);
        sum += longint'(a) * longint'(b);
      end
      @(negedge clk); en = 0; first = 0;
      check(sum, $sformatf("random dot %0d", op));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
