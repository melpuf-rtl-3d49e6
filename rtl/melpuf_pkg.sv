// melpuf_pkg: types and constants shared by the MeLPUF modules.
//
// The MeLPUF ("memory-in-logic" PUF) turns selected logic gates of a design into
// PUF sites: at each site a cross-coupled inverter pair and a 2:1 control MUX are
// placed on the gate output. This package holds the default sizes of that
// arrangement, the capture controller's state type and the hash used by the
// behavioural model of the inverter pair to give every instance its own fixed
// device mismatch.
//
// N_PUF_DEFAULT = 1024 follows the 1024-bit response used for the overhead and
// quality comparison of the design. The RAM word width, settling time and the
// mismatch model are choices of this implementation.
package melpuf_pkg;
  timeunit 1ns;
  timeprecision 1ps;

  // Number of PUF sites, one response bit each (1024-bit response).
  localparam int unsigned N_PUF_DEFAULT = 1024;
  // Width of one word of the signature RAM (own choice).
  localparam int unsigned SIG_W_DEFAULT = 32;
  // Clock cycles the controller keeps the PUF mode before sampling (own choice).
  localparam int unsigned SETTLE_CYCLES_DEFAULT = 16;

  // Mismatch model of the inverter pair (own choice): a fixed offset drawn
  // uniformly from [-MISMATCH_RANGE, MISMATCH_RANGE] per instance, plus a noise
  // term drawn uniformly from [-NOISE, NOISE] at every power-up. With the pair
  // resolving to 1 when the sum is positive, the expected intra-HD between two
  // power-ups is NOISE / (3 * MISMATCH_RANGE); NOISE = 77 gives about 2.57 %.
  localparam int MISMATCH_RANGE = 1000;
  localparam int NOISE_DEFAULT  = 77;

  // Capture controller states.
  typedef enum logic [1:0] {
    ST_SETTLE  = 2'd0,  // control low, waiting for the pairs and registers
    ST_CAPTURE = 2'd1,  // control low, one RAM word written per cycle
    ST_FUNC    = 2'd2   // control high, the host logic runs normally
  } ctrl_state_e;

  // 32-bit avalanche hash (the finaliser of MurmurHash3). Used only to derive
  // per-instance mismatch and per-power-up noise in the behavioural model.
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h85eb_ca6b;
    h = h ^ (h >> 13);
    h = h * 32'hc2b2_ae35;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Value uniformly spread over [-range, range] taken from a hash word.
  function automatic int spread(input logic [31:0] h, input int range);
    return int'(h % (2 * range + 1)) - range;
  endfunction

endpackage
