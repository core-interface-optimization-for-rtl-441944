// cam_mlsa: behavioural model of a current-race match-line sense amplifier
// (MLSA) with feedback control and speculative sense, one per CAM entry.
//
// This is a cycle-level model of an analog circuit, not a netlist. The
// match line (ML) is precharged to ground while the search request is low.
// During a search a current source charges the ML unless a mismatching
// cell pulls it down; after CHARGE_CYCLES cycles of charging without a
// pull-down the line crosses the threshold of the sensing transistor and
// the MLSA output (match) rises. The current source is switched off by
//   * Off, from the dummy entry, ending every search (as in the baseline);
//   * feedback control: the MLSA's own output once it has matched
//     (FEEDBACK = 1), so a matching line stops charging early;
//   * speculative sense: a mismatch found in the entry's last SPEC_BITS
//     cells before the request arrives (SPEC = 1), so a mismatching line
//     never draws its pull-down current.
// src_on reports whether the current source conducts this cycle; summed
// over the array it is the current that the CSCD block senses and a proxy
// for search energy. match is held until the request falls.
//
// The dummy entry is this model with ml_pd tied low, spec_mis tied low
// and a larger CHARGE_CYCLES, so it is the last matching line to fire.
module cam_mlsa
  import core_if_pkg::*;
#(
  parameter int unsigned CHARGE_CYCLES = ML_CHARGE_CYCLES,
  parameter bit          FEEDBACK      = 1'b1,
  parameter bit          SPEC          = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic req,       // search request from the HS block
  input  logic off,       // Off from the dummy entry
  input  logic ml_pd,  // some cell of the entry mismatches
  input  logic spec_mis,  // a sensed cell near the MLSA mismatches
  output logic match,
  output logic src_on
);
  localparam int unsigned CW = $clog2(CHARGE_CYCLES + 1);
  logic [CW-1:0] ml_q;  // match-line voltage, in charging steps

  assign src_on = req && !off && !(FEEDBACK && match) && !(SPEC && spec_mis);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ml_q  <= '0;
      match <= 1'b0;
    end else if (!req) begin          // precharge ML to ground
      ml_q  <= '0;
      match <= 1'b0;
    end else if (ml_pd) begin
      ml_q  <= '0;
    end else if (src_on && !match) begin
      ml_q <= ml_q + 1'b1;
      if (ml_q + 1'b1 >= CW'(CHARGE_CYCLES)) match <= 1'b1;
    end
  end
endmodule
