// shared_mac: post-pass multiply-accumulate unit.
//
// Forms sum_k bin[k] * weight[k] for one PAS unit: a W x W signed multiplier
// feeding a 2W-bit adder and result register, one product per cycle. Because
// it needs only b products per dot product (instead of one per input), one
// such MAC is time-shared by several PAS units.
//
// Timing: when en is high the product a*b is added into the result register
// at the clock edge; when first is also high the register is loaded with the
// product instead (start of a new dot product). result is the register
// output. Operands are signed two's complement; the 2W-bit register width
// follows the design's block diagram and wraps on overflow. Signedness and the
// first/en controls are this design's choices.
module shared_mac #(
  parameter int unsigned W = pasm_pkg::W_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  first,
  input  logic signed [W-1:0]   a,       // binned image value
  input  logic signed [W-1:0]   b,       // shared weight
  output logic signed [2*W-1:0] result
);

  logic signed [2*W-1:0] prod;
  logic signed [2*W-1:0] acc_q;

  assign prod = a * b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc_q <= '0;
    else if (en)     acc_q <= first ? prod : acc_q + prod;
  end

  assign result = acc_q;

endmodule
