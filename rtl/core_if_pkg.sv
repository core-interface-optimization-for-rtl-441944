// core_if_pkg: constants and types shared by the core interface.
//
// The output interface encodes neuron spikes with a hierarchical arbiter
// tree (HAT): every level arbitrates among four clusters and yields two
// address bits, so a core of 4**HAT_LEVELS neurons needs HAT_LEVELS levels.
// Three levels (64 neurons, 6-bit address) is the example configuration the
// design is built around. The input interface is an asynchronous-style CAM
// with CAM_ENTRIES tags of CAM_WIDTH bits; 512 x 11 is the larger of the two
// evaluated design points, and the last CAM_SPEC_BITS cells of every entry feed
// the speculative-sense path.
package core_if_pkg;

  // Hierarchical arbiter tree
  parameter int unsigned HAT_WAYS   = 4;  // four-input arbiter on every level
  parameter int unsigned HAT_LEVELS = 3;  // 64 neurons
  parameter int unsigned HAT_DIGIT  = 2;  // address bits per level

  // CAM
  parameter int unsigned CAM_ENTRIES = 512;
  parameter int unsigned CAM_WIDTH   = 11;
  parameter int unsigned CAM_SPEC_BITS = 3;

  // Match-line charging model: clock cycles a matching line needs to reach
  // the sense threshold, and the slower dummy line that produces Off.
  parameter int unsigned ML_CHARGE_CYCLES    = 2;
  parameter int unsigned DUMMY_CHARGE_CYCLES = 3;

  // One four-way level in one-hot form, and a dual-rail bit.
  typedef logic [HAT_WAYS-1:0] onehot4_t;
  typedef struct packed {
    logic t;  // true rail
    logic f;  // false rail
  } dualrail_t;

  // One-hot to 2-bit dual-rail code of the QDI encoder. Empty (all zero)
  // in gives the empty code, both rails of both bits low.
  function automatic dualrail_t [HAT_DIGIT-1:0] encode_onehot4(input onehot4_t g);
    dualrail_t [HAT_DIGIT-1:0] d;
    d[0].t = g[1] | g[3];
    d[0].f = g[0] | g[2];
    d[1].t = g[2] | g[3];
    d[1].f = g[0] | g[1];
    return d;
  endfunction

  // Completion detection of a dual-rail word: every bit has one rail high.
  function automatic logic dr_complete2(input dualrail_t [HAT_DIGIT-1:0] d);
    return (d[0].t | d[0].f) & (d[1].t | d[1].f);
  endfunction

endpackage
