// weight_regfile: the table of shared ("pretrained") weights.
//
// Weight sharing replaces each weight by a wci-bit index into a table of
// b = 2**wci shared values. This register file holds that table: B words of
// W bits, written one word per cycle through the load port and read
// combinationally by bin index. In the accelerator a single read port is
// enough, because all post-pass MACs step through the bins in lock-step and
// therefore need the same weight in the same cycle.
//
// Interface: we/waddr/wdata write one entry at the rising clock edge;
// raddr -> rdata is combinational (same-cycle read).
// The table contents and index width follow the design description; the load
// port, the reset-to-zero and the combinational read are this design's choices.
module weight_regfile #(
  parameter int unsigned W   = pasm_pkg::W_DEF,
  parameter int unsigned WCI = pasm_pkg::WCI_DEF,
  localparam int unsigned B  = 2 ** WCI
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // load port
  input  logic                  we,
  input  logic [WCI-1:0]        waddr,
  input  logic signed [W-1:0]   wdata,
  // read port
  input  logic [WCI-1:0]        raddr,
  output logic signed [W-1:0]   rdata
);

  logic signed [W-1:0] mem [B];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < B; i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata = mem[raddr];

endmodule
