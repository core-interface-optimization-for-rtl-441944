// hat_cluster_bus: shared request and grant lines between the neurons of a
// core and the levels of the HAT.
//
// Neuron n has address {d0, d1, ..., d(LEVELS-1)}, two bits per level, d0
// the most significant. At level l, cluster j is the set of neurons whose
// digit l equals j: at the highest level the 16 neurons of one quarter of a
// 64-neuron core, at the middle level the same 2x2 corner of every quarter,
// at the lowest level the same position of every 2x2 group. A neuron
// pulls the request line of its cluster at level l only once the clusters
// it belongs to at all higher levels have been granted, so lower levels
// see only the neurons of the granted higher-level cluster. A neuron is
// granted when its cluster is granted at every level.
//
// In silicon these are wired-OR lines (pull-down transistors in every
// neuron, a pull-up per cluster); here they are OR and AND gates,
// combinational. Interface: neu_req/neu_grant, one pair per neuron;
// lvl_neu_req/lvl_neu_grant, four pairs per level, to hat_pipeline.
module hat_cluster_bus
  import core_if_pkg::*;
#(
  parameter int unsigned LEVELS  = HAT_LEVELS,
  parameter int unsigned NEURONS = 4 ** LEVELS
) (
  input  logic [NEURONS-1:0]    neu_req,
  output logic [NEURONS-1:0]    neu_grant,
  output onehot4_t [LEVELS-1:0] lvl_neu_req,
  input  onehot4_t [LEVELS-1:0] lvl_neu_grant
);
  always_comb begin
    lvl_neu_req = '0;
    neu_grant   = '0;
    for (int n = 0; n < NEURONS; n++) begin
      logic upper_granted;
      upper_granted = 1'b1;
      for (int l = 0; l < LEVELS; l++) begin
        logic [HAT_DIGIT-1:0] d;
        d = HAT_DIGIT'(n >> (HAT_DIGIT * (LEVELS - 1 - l)));
        lvl_neu_req[l][d] |= neu_req[n] & upper_granted;
        upper_granted &= lvl_neu_grant[l][d];
      end
      neu_grant[n] = upper_granted;
    end
  end
endmodule
