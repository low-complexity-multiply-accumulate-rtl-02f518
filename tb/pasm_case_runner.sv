// pasm_case_runner: testbench helper that runs one accelerator configuration.
//
// It instantiates pasm_accel with the given width W and bin-index width WCI,
// loads B random shared weights, streams NOPS dot products and checks all
// results against a software model. The model follows the datapath exactly:
// each bin is a W-bit two's-complement accumulator that wraps, and the dot
// product is the 2W-bit wrapped sum of bin * weight. Whenever no bin left
// the W-bit range, the result must also equal a direct weight-shared MAC
// (sum of image * weight[index]); overflow events are counted. With TABLE2
// set, the stream lengths are the k*k*c dot-product lengths of 1x1..7x7
// kernels on 32/128/512 input channels (32 ... 25088 inputs); otherwise they
// are random. finished rises when all operations are checked.
module pasm_case_runner #(
  parameter int unsigned W      = 32,
  parameter int unsigned WCI    = 4,
  parameter bit          TABLE2 = 1'b0,
  parameter int unsigned NOPS   = 4
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   overflows
);
  localparam int B = 2 ** WCI, NI = 4, NK = 4, NM = 4, NP = 16, NG = 4;
  localparam int GW = 2;
  localparam int TLEN [12] = '{32, 128, 512, 288, 1152, 4608, 800, 3200, 12800, 1568, 6272, 25088};

  logic w_we;
  logic [WCI-1:0] w_addr;
  logic signed [W-1:0] w_data;
  logic in_valid, in_last, in_ready;
  logic [NI-1:0][W-1:0] image;
  logic [NK-1:0][WCI-1:0] bin_index;
  logic res_valid, done, busy;
  logic [GW-1:0] res_grp;
  logic [NM-1:0][2*W-1:0] res;

  pasm_accel #(.W(W), .WCI(WCI)) dut (.*);

  longint signed weights [B];
  longint signed mbin [NP][B];     // wrapped W-bit bins
  longint signed wide  [NP][B];    // unbounded bins
  longint signed direct [NP];
  bit ovf;

  function automatic longint signed wrap(input longint signed v, input int bits);
    longint signed m;
    if (bits >= 64) return v;
    m = v & ((64'sd1 <<< bits) - 1);
    if (m[bits-1]) m = m - (64'sd1 <<< bits);
    return m;
  endfunction

  initial begin
    int nops;
    finished = 0; checks = 0; failures = 0; overflows = 0;
    w_we = 0; w_addr = '0; w_data = '0;
    in_valid = 0; in_last = 0; image = '0; bin_index = '0;
    wait (rst_n);
    @(negedge clk);
    for (int k = 0; k < B; k++) begin
      w_we = 1; w_addr = WCI'(k);
      w_data = W'($urandom);
      weights[k] = longint'(w_data);
      @(negedge clk);
    end
    w_we = 0;
    nops = TABLE2 ? 12 : NOPS;
    for (int op = 0; op < nops; op++) begin
      int n;
      n = TABLE2 ? TLEN[op] : $urandom_range(1, 300);
      for (int p = 0; p < NP; p++) begin
        direct[p] = 0;
        for (int k = 0; k < B; k++) begin mbin[p][k] = 0; wide[p][k] = 0; end
      end
      for (int t = 0; t < n; t++) begin
        in_valid = 1; in_last = (t == n - 1);
        for (int i = 0; i < NI; i++) begin
          // 16-bit images on the 32-bit datapath for the long streams
          // wide configurations keep 9 bits of headroom so most bins do not
          // overflow; 4- and 8-bit ones use the full range and do
          if (TABLE2 && W == 32) image[i] = W'($signed($urandom) >>> 16);
          else if (W >= 16)      image[i] = W'($signed(W'($urandom)) >>> 9);
          else                   image[i] = W'($urandom);
        end
        for (int j = 0; j < NK; j++) bin_index[j] = WCI'($urandom);
        for (int i = 0; i < NI; i++)
          for (int j = 0; j < NK; j++) begin
            longint signed v;
            v = longint'($signed(image[i]));
            mbin[i*NK+j][bin_index[j]] = wrap(mbin[i*NK+j][bin_index[j]] + v, W);
            wide[i*NK+j][bin_index[j]] += v;
            direct[i*NK+j] += v * weights[bin_index[j]];
          end
        // hold the beat until a cycle in which it is accepted
        while (!in_ready) @(negedge clk);
        @(negedge clk);
      end
      in_valid = 0; in_last = 0;
      // collect the 4 result groups
      for (int g = 0; g < NG; g++) begin
        @(negedge clk);
        while (!res_valid) @(negedge clk);
        for (int m = 0; m < NM; m++) begin
          int p;
          longint signed e;
          p = m * NG + int'(res_grp);
          e = 0;
          ovf = 0;
          for (int k = 0; k < B; k++) begin
            e = wrap(e + mbin[p][k] * weights[k], 2 * W);
            if (wide[p][k] != mbin[p][k]) ovf = 1;
          end
          checks++;
          if (wrap(longint'($signed(res[m])), 2 * W) != e) begin
            failures++;
            $display("FAIL W=%0d WCI=%0d n=%0d PAS %0d: got %0d expected %0d",
                     W, WCI, n, p, $signed(res[m]), e);
          end
          if (ovf) overflows++;
          else begin
            checks++;
            if (wrap(direct[p], 2 * W) != e) begin
              failures++;
              $display("FAIL W=%0d WCI=%0d PAS %0d differs from direct MAC", W, WCI, p);
            end
          end
        end
      end
    end
    finished = 1;
  end
endmodule
