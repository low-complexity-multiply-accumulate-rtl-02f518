// pas_unit: Parallel Accumulate and Store (PAS) unit.
//
// Instead of multiplying each image value by its shared weight, the PAS keeps
// one accumulator ("bin") per shared weight and adds the image value into the
// bin named by its bin index: an index-and-add replaces the multiply. After n
// inputs, bin k holds the sum of all image values that met weight k, and the
// dot product is sum_k bin[k] * weight[k], formed later by a shared MAC.
//
// Storage is a B-entry register file of W-bit bins with two ports: an
// accumulate port (read-add-write of bin[bin_index]) and a read port (rd_idx ->
// rd_data, combinational) used by the post-pass MAC.
//
// Timing: when acc_en is high, bin[bin_index] += image at the clock edge, one
// input pair per cycle. acc_first marks the first input of a new dot product:
// in that cycle every bin is cleared and bin[bin_index] is loaded with image,
// so no separate clear cycle is needed. The bins are W bits wide as drawn in
// the design's block diagram and wrap on overflow (two's complement). The
// acc_first mechanism, reset and overflow behaviour are this design's choices.
module pas_unit #(
  parameter int unsigned W   = pasm_pkg::W_DEF,
  parameter int unsigned WCI = pasm_pkg::WCI_DEF,
  localparam int unsigned B  = 2 ** WCI
) (
  input  logic                clk,
  input  logic                rst_n,
  // accumulate port (phase 1)
  input  logic                acc_en,
  input  logic                acc_first,
  input  logic signed [W-1:0] image,
  input  logic [WCI-1:0]      bin_index,
  // read port (phase 2)
  input  logic [WCI-1:0]      rd_idx,
  output logic signed [W-1:0] rd_data
);

  logic signed [W-1:0] bin_q [B];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < B; k++) bin_q[k] <= '0;
    end else if (acc_en) begin
      if (acc_first) begin
        for (int k = 0; k < B; k++) bin_q[k] <= '0;
        bin_q[bin_index] <= image;
      end else begin
        bin_q[bin_index] <= bin_q[bin_index] + image;
      end
    end
  end

  assign rd_data = bin_q[rd_idx];

endmodule
