// pasm_ctrl: phase sequencer of the PASM accelerator.
//
// A PASM dot product has two phases. Phase 1 (accumulate) streams one set of
// image values and bin indices per cycle into the PAS units for as long as the
// producer supplies them; the beat flagged in_last ends it. Phase 2 (multiply)
// walks each shared MAC through the B bins of each of the NGRP PAS units it
// serves: bin counter 0..B-1 inside group counter 0..NGRP-1. The group counter
// selects which PAS unit feeds every MAC, the bin counter addresses both the
// PAS read port and the weight register file.
//
// Interface and timing:
//  * in_ready is low during phase 2; an input offered then is stalled.
//  * acc_en / acc_first go to the PAS units in the cycle of an accepted beat;
//    acc_first is high on the first beat after idle.
//  * mul_en / mul_first / bin_sel / grp_sel drive phase 2 combinationally.
//  * res_valid / res_grp are registered: they rise in the cycle after the last
//    bin of a group, when the MAC result registers hold that group's dot
//    products. done marks the last group.
//  For n input beats the last results appear n + NGRP*B cycles after the first
//  beat was accepted (n + b per PAS, with NGRP PAS units sharing one MAC). A new
//  operation may start in the cycle the last results appear.
// The two phases and the cycle counts follow the design description; the
// valid/ready/last handshake and the no-overlap scheduling are this design's
// choices. The assertions at the end are disabled during reset; lint tools
// therefore see rst_n used both asynchronously (flops) and synchronously
// (assertion clocking), which is intended.
module pasm_ctrl
  import pasm_pkg::*;
#(
  parameter int unsigned WCI  = pasm_pkg::WCI_DEF,
  parameter int unsigned NGRP = pasm_pkg::N_KER_DEF,
  localparam int unsigned B   = 2 ** WCI,
  localparam int unsigned GW  = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // input stream handshake
  input  logic            in_valid,
  input  logic            in_last,
  output logic            in_ready,
  // phase 1 controls
  output logic            acc_en,
  output logic            acc_first,
  // phase 2 controls
  output logic            mul_en,
  output logic            mul_first,
  output logic [WCI-1:0]  bin_sel,
  output logic [GW-1:0]   grp_sel,
  // result strobe
  output logic            res_valid,
  output logic [GW-1:0]   res_grp,
  output logic            done,
  output pasm_state_e     state
);

  pasm_state_e      state_q, state_d;
  logic [WCI-1:0]   bin_q;
  logic [GW-1:0]    grp_q;
  logic             fire;
  logic             last_bin, last_grp;

  assign in_ready  = (state_q != ST_MULT);
  assign fire      = in_valid && in_ready;
  assign acc_en    = fire;
  assign acc_first = fire && (state_q == ST_IDLE);

  assign mul_en    = (state_q == ST_MULT);
  assign mul_first = mul_en && (bin_q == '0);
  assign bin_sel   = bin_q;
  assign grp_sel   = grp_q;
  assign last_bin  = (bin_q == WCI'(B - 1));
  assign last_grp  = (grp_q == GW'(NGRP - 1));
  assign state     = state_q;

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      ST_IDLE, ST_ACCUM: if (fire) state_d = in_last ? ST_MULT : ST_ACCUM;
      ST_MULT:           if (last_bin && last_grp) state_d = ST_IDLE;
      default:           state_d = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= ST_IDLE;
      bin_q     <= '0;
      grp_q     <= '0;
      res_valid <= 1'b0;
      res_grp   <= '0;
      done      <= 1'b0;
    end else begin
      state_q   <= state_d;
      res_valid <= mul_en && last_bin;
      res_grp   <= grp_q;
      done      <= mul_en && last_bin && last_grp;
      if (mul_en) begin
        bin_q <= bin_q + 1'b1;          // wraps to 0 after B-1
        if (last_bin) grp_q <= last_grp ? '0 : grp_q + 1'b1;
      end
    end
  end

  // The PAS units must not be written while their bins are being read out,
  // and the counters rest at zero between operations.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    !(acc_en && mul_en));
  a_idle_zero:  assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == ST_IDLE) |-> (bin_q == '0 && grp_q == '0));
  a_stall:      assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == ST_MULT) |-> !in_ready);

endmodule
