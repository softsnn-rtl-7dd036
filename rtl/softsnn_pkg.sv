// softsnn_pkg: types and default sizes shared by the soft-error tolerant
// SNN compute engine.
//
// The engine is an M x N crossbar of 8-bit synapses whose columns feed N
// leaky integrate-and-fire neurons. Two run-time mitigations guard it:
// weight bounding in every synapse and burst-spike protection in every
// neuron (together "Bound-and-Protect", BnP). The 8-bit weight, the 256x256
// crossbar and the refractory count of 5 follow the paper; the partial-sum
// and membrane widths are this design's own choice.
//
// The fault types below are the four faulty neuron operations of the
// paper's soft-error model. They drive the fault-injection hook of the
// neuron, which a chip ties to NF_NONE.
package softsnn_pkg;

  // Synapse weight precision (paper: 8-bit weights).
  localparam int unsigned WGH_W   = 8;
  // Crossbar size (paper: 256x256 synapses, 256 neurons).
  localparam int unsigned M_ROWS  = 256;
  localparam int unsigned N_COLS  = 256;
  // Refractory period loaded into T_ref after a spike (paper figure: 5).
  localparam int unsigned T_REF   = 5;
  localparam int unsigned TREF_W  = 3;
  // Membrane potential width (own choice; holds Vth plus one column sum).
  localparam int unsigned VMEM_W  = 20;

  // Partial-sum width able to hold ROWS full-scale weights without overflow.
  function automatic int unsigned psum_width(int unsigned rows);
    return WGH_W + $clog2(rows);
  endfunction

  // BnP variant. BnP1 replaces a bounded weight by 0 and needs no wgh_def
  // register; BnP2 and BnP3 load wgh_def with wgh_max or with the most
  // probable clean weight, which is the same hardware.
  typedef enum logic [1:0] {
    BNP1 = 2'd1,
    BNP2 = 2'd2,
    BNP3 = 2'd3
  } bnp_e;

  // Faulty neuron operation (soft-error model of the neuron part).
  typedef enum logic [2:0] {
    NF_NONE = 3'd0,  // healthy
    NF_VI   = 3'd1,  // 'Vmem increase' lost: weights are not added
    NF_VL   = 3'd2,  // 'Vmem leak' lost: Vmem does not decrease
    NF_VR   = 3'd3,  // 'Vmem reset' lost: no reset, no refractory period
    NF_SG   = 3'd4   // 'spike generation' lost: no spike is produced
  } nfault_e;

  // Neuron parameters, broadcast when a new set is loaded.
  typedef struct packed {
    logic [VMEM_W-1:0] vth;     // threshold potential
    logic [VMEM_W-1:0] vreset;  // reset potential
    logic [VMEM_W-1:0] vleak;   // leak per cycle (magnitude)
  } nparam_t;

endpackage
