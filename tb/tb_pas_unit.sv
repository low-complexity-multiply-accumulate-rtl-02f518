// tb_pas_unit: self-checking test of the PAS (accumulate-into-bins) unit.
// First replays the phase-1 example of the design description scaled by 10
// (image 267, 34, 48, 177, 61 with bin indices 0, 1, 2, 3, 0 must leave bins
// 328, 34, 48, 177), then runs random streams of random length against a
// software model of the bins, including idle cycles (acc_en low) and restarts
// with acc_first. Every bin is read back through the read port.
module tb_pas_unit;
  localparam int W = 32, WCI = 4, B = 2 ** WCI;

  logic clk = 0, rst_n = 0;
  logic acc_en = 0, acc_first = 0;
  logic signed [W-1:0] image = '0, rd_data;
  logic [WCI-1:0] bin_index = '0, rd_idx = '0;
  logic signed [W-1:0] model [B];
  int checks = 0, failures = 0;

  pas_unit #(.W(W), .WCI(WCI)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push(input logic signed [W-1:0] img, input int idx, input bit first);
    @(negedge clk);
    acc_en = 1; acc_first = first; image = img; bin_index = idx[WCI-1:0];
    if (first) foreach (model[k]) model[k] = '0;
    model[idx] = model[idx] + img;
    @(negedge clk);
    acc_en = 0; acc_first = 0;
  endtask

  task automatic check_bins(input string what);
    for (int k = 0; k < B; k++) begin
      rd_idx = k[WCI-1:0]; #1;
      checks++;
      if (rd_data !== model[k]) begin
        failures++;
        $display("FAIL %s bin %0d: got %0d expected %0d", what, k, rd_data, model[k]);
      end
    end
  endtask

  initial begin
    foreach (model[k]) model[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check_bins("after reset");
    // scaled example: 26.7 3.4 4.8 17.7 6.1 -> bins 32.8 3.4 4.8 17.7
    push(267, 0, 1); push(34, 1, 0); push(48, 2, 0); push(177, 3, 0); push(61, 0, 0);
    check_bins("example");
    checks++;
    if (model[0] != 328 || model[1] != 34 || model[2] != 48 || model[3] != 177) begin
      failures++; $display("FAIL example model");
    end
    // random streams, back-to-back beats, random idle gaps
    for (int op = 0; op < 30; op++) begin
      int n;
      n = $urandom_range(1, 200);
      for (int t = 0; t < n; t++) begin
        @(negedge clk);
        acc_en = ($urandom_range(0, 3) != 0) || (t == 0);
        acc_first = acc_en && (t == 0);
        image = $signed($urandom);
        bin_index = WCI'($urandom);
        if (acc_en) begin
          if (acc_first) foreach (model[k]) model[k] = '0;
          model[bin_index] = model[bin_index] + image;
        end
      end
      @(negedge clk); acc_en = 0; acc_first = 0;
      check_bins($sformatf("random op %0d", op));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
