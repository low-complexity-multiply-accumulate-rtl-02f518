// tb_weight_regfile: self-checking test of the shared-weight register file.
// Checks that all entries read zero after reset, that every entry can be
// written and read back at its own index (random and all-distinct values, so
// an address fault shows), and that a cycle without write enable changes
// nothing. A watchdog ends the run if it hangs.
module tb_weight_regfile;
  localparam int W = 32, WCI = 4, B = 2 ** WCI;

  logic clk = 0, rst_n = 0;
  logic we = 0;
  logic [WCI-1:0] waddr = '0, raddr = '0;
  logic signed [W-1:0] wdata = '0, rdata;
  logic signed [W-1:0] model [B];
  int checks = 0, failures = 0;

  weight_regfile #(.W(W), .WCI(WCI)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic signed [W-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < B; k++) begin
      raddr = k[WCI-1:0]; #1;
      check(rdata, '0, "reset value");
    end
    // write all entries, distinct values
    for (int k = 0; k < B; k++) begin
      @(negedge clk);
      we = 1; waddr = k[WCI-1:0]; wdata = $signed($urandom) ^ (k << 8);
      model[k] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < B; k++) begin
      raddr = k[WCI-1:0]; #1;
      check(rdata, model[k], $sformatf("read entry %0d", k));
    end
    // random overwrites, some with we low
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      we = $urandom_range(0, 1) == 1;
      waddr = WCI'($urandom);
      wdata = $signed($urandom);
      raddr = WCI'($urandom);
      #1 check(rdata, model[raddr], "random read");
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < B; k++) begin
      raddr = k[WCI-1:0]; #1;
      check(rdata, model[k], "final read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
