// pasm_accel: 16-PAS-4-MAC weight-sharing convolution accelerator (top).
//
// Each cycle the accelerator takes N_IMG image values and N_KER bin indices
// (indices into the shared-weight table) and performs N_IMG*N_KER
// multiply-accumulate operations, not with multipliers but with PAS units:
// PAS unit p = i*N_KER + j adds image[i] into its bin bin_index[j]. With the
// defaults this is 4 x 4 = 16 PAS units. Image lane i is read as one output
// pixel position and index lane j as one kernel (output channel), so PAS p
// builds the dot product of output pixel i with kernel j.
//
// When the input stream ends (in_last), N_MAC shared MACs turn the bins into
// dot products: MAC m serves the NGRP = N_PAS/N_MAC PAS units m*NGRP .. m*NGRP
// + NGRP-1, one after another, spending B cycles (one per bin) on each. All
// MACs run in lock-step and read the same weight from the single weight
// register file. Results leave on res[m] with res_valid; res_grp = g says that
// res[m] is the dot product of PAS unit m*NGRP + g (with the defaults: image
// lane m, kernel lane g).
//
// Timing: one input set per cycle during phase 1; in_ready is low during the
// N_MAC-parallel phase 2, which lasts NGRP*B cycles. The last results appear
// n + NGRP*B cycles after the first of n input sets (64 + n with the defaults).
// Weights are loaded through w_we/w_addr/w_data, one per cycle, and must not
// change during phase 2.
// The PAS/shared-MAC structure, the 4+4 inputs, 16 PAS and 4 MACs follow the
// design description; the lane-to-PAS mapping, the assignment of PAS units to
// MACs, the handshake and the result format are this design's choices.
module pasm_accel
  import pasm_pkg::*;
#(
  parameter int unsigned W     = pasm_pkg::W_DEF,
  parameter int unsigned WCI   = pasm_pkg::WCI_DEF,
  parameter int unsigned N_IMG = pasm_pkg::N_IMG_DEF,
  parameter int unsigned N_KER = pasm_pkg::N_KER_DEF,
  parameter int unsigned N_MAC = pasm_pkg::N_MAC_DEF,
  localparam int unsigned N_PAS = N_IMG * N_KER,
  localparam int unsigned NGRP  = N_PAS / N_MAC,
  localparam int unsigned GW    = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // shared weight table load
  input  logic                           w_we,
  input  logic [WCI-1:0]                 w_addr,
  input  logic signed [W-1:0]            w_data,
  // input stream: image values and bin indices
  input  logic                           in_valid,
  input  logic                           in_last,
  output logic                           in_ready,
  input  logic [N_IMG-1:0][W-1:0]        image,
  input  logic [N_KER-1:0][WCI-1:0]      bin_index,
  // results
  output logic                           res_valid,
  output logic [GW-1:0]                  res_grp,
  output logic [N_MAC-1:0][2*W-1:0]      res,
  output logic                           done,
  output logic                           busy
);

  // The MACs must split the PAS units evenly between them.
  if (N_PAS % N_MAC != 0) begin : g_bad_share
    $error("pasm_accel: N_IMG*N_KER must be a multiple of N_MAC");
  end

  logic              acc_en, acc_first, mul_en, mul_first;
  logic [WCI-1:0]    bin_sel;
  logic [GW-1:0]     grp_sel;
  pasm_state_e       state;
  logic signed [W-1:0] weight;
  logic signed [W-1:0] pas_rd [N_PAS];

  pasm_ctrl #(.WCI(WCI), .NGRP(NGRP)) u_ctrl (
    .clk, .rst_n,
    .in_valid, .in_last, .in_ready,
    .acc_en, .acc_first,
    .mul_en, .mul_first, .bin_sel, .grp_sel,
    .res_valid, .res_grp, .done,
    .state
  );

  assign busy = (state != ST_IDLE);

  weight_regfile #(.W(W), .WCI(WCI)) u_wrf (
    .clk, .rst_n,
    .we(w_we), .waddr(w_addr), .wdata(w_data),
    .raddr(bin_sel), .rdata(weight)
  );

  for (genvar i = 0; i < N_IMG; i++) begin : g_img
    for (genvar j = 0; j < N_KER; j++) begin : g_ker
      pas_unit #(.W(W), .WCI(WCI)) u_pas (
        .clk, .rst_n,
        .acc_en, .acc_first,
        .image(image[i]), .bin_index(bin_index[j]),
        .rd_idx(bin_sel), .rd_data(pas_rd[i*N_KER + j])
      );
    end
  end

  for (genvar m = 0; m < N_MAC; m++) begin : g_mac
    logic signed [W-1:0]   mac_a;
    logic signed [2*W-1:0] mac_r;
    // select the PAS unit of the current group for this MAC
    assign mac_a = pas_rd[m*NGRP + int'(grp_sel)];
    shared_mac #(.W(W)) u_mac (
      .clk, .rst_n,
      .en(mul_en), .first(mul_first),
      .a(mac_a), .b(weight),
      .result(mac_r)
    );
    assign res[m] = mac_r;
  end

endmodule
