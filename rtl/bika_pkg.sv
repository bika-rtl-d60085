// bika_pkg: constants and types shared by the BiKA accelerator.
//
// The accelerator evaluates layers of a binarized Kolmogorov-Arnold-style
// network: every input of a neuron passes through its own learnable
// threshold, giving +1 or -1, and the neuron output is the sum of these
// signs. Activations and thresholds are 8 bit, following the 8-bit instance
// evaluated in the paper; the accumulator is 8 bit signed with a limited
// (saturating) sum, range [-128, 127]. The two's-complement encoding of
// activations and thresholds, the layer configuration record and the host
// buffer select are this design's choices.
package bika_pkg;

  localparam int unsigned DATA_W = 8;   // activation / threshold width
  localparam int unsigned ACC_W  = 8;   // accumulator (neuron output) width

  // Layer configuration, sampled by the controller on start.
  typedef struct packed {
    logic [10:0] k_len;     // inputs per neuron (fan-in), 1..2047
    logic [7:0]  m_groups;  // number of groups of ROWS input vectors
    logic [7:0]  n_groups;  // number of groups of COLS neurons
  } layer_cfg_t;

  // Buffer selected by a host write.
  typedef enum logic [1:0] {
    SEL_ACT = 2'd0,   // activation buffer
    SEL_THR = 2'd1    // threshold buffer
  } host_sel_e;

endpackage
