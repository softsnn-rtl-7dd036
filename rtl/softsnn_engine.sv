// softsnn_engine: BnP-enhanced SNN compute engine (top level).
//
// An M x N crossbar of synapses feeds N LIF neurons, one per column. Input
// spike r drives row r; each synapse adds its (bounded) weight to the
// column's running partial sum when its row spikes, and registers the
// result, so a column is a chain of M adder/register stages ending at its
// neuron. Weight bounding happens in every synapse against the shared
// wgh_th/wgh_def registers; burst protection happens in every neuron.
// Because the column chain is pipelined, spike_skew delays row r's input by
// r cycles, and one spike vector (one SNN time step) can enter per cycle.
//
// Latency: a spike vector presented on spike_in in cycle t is summed in the
// column registers by cycle t+M, integrated by the neurons at the end of
// cycle t+M, and any resulting spike is on out_spike in cycle t+M+1.
//
// The blocks around the engine in a full accelerator (weight and neuron
// buffers, controller, learning unit, DRAM) are outside this module; their
// traffic enters through plain load ports:
//   * w_ld/w_row/w_data writes one crossbar row of N weights per cycle.
//   * p_ld broadcasts one neuron parameter set to all neurons.
//   * bnd_ld loads wgh_th and wgh_def.
// Soft-error hooks (tie to 0 in a chip): flip_vld XORs flip_mask into the
// weight at (flip_row, flip_col); nf_vld records faulty operation nf_op in
// neuron nf_idx.
//
// The sizes (256x256, 8-bit weights) and the BnP circuits follow the paper;
// the load ports, the skew line, the widths of sums and Vmem and all reset
// values are this design's choices.
module softsnn_engine
  import softsnn_pkg::*;
#(
  parameter int unsigned M       = M_ROWS,
  parameter int unsigned N       = N_COLS,
  parameter int unsigned W       = WGH_W,
  parameter bnp_e        BNP     = BNP3,
  parameter bit          BOUND   = 1'b1,
  parameter bit          PROTECT = 1'b1,
  localparam int unsigned PSUM_W = psum_width(M),
  localparam int unsigned RW     = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned CW     = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // bounding registers
  input  logic              bnd_ld,
  input  logic [W-1:0]      bnd_th,
  input  logic [W-1:0]      bnd_def,
  // neuron parameters
  input  logic              p_ld,
  input  nparam_t           p_set,
  // weight row load
  input  logic              w_ld,
  input  logic [RW-1:0]     w_row,
  input  logic [W-1:0]      w_data [N],
  // soft-error hooks
  input  logic              flip_vld,
  input  logic [RW-1:0]     flip_row,
  input  logic [CW-1:0]     flip_col,
  input  logic [W-1:0]      flip_mask,
  input  logic              nf_vld,
  input  logic [CW-1:0]     nf_idx,
  input  nfault_e           nf_op,
  // spikes
  input  logic [M-1:0]      spike_in,
  output logic [N-1:0]      out_spike,
  output logic [N-1:0]      protect
);

  logic [W-1:0]      wgh_th, wgh_def;
  logic [M-1:0]      spk_row;
  logic [PSUM_W-1:0] psum [M+1][N];

  bnp_bound_regs #(.BNP(BNP), .W(W)) u_bnd (
    .clk, .rst_n,
    .ld     (bnd_ld),
    .th_i   (bnd_th),
    .def_i  (bnd_def),
    .wgh_th (wgh_th),
    .wgh_def(wgh_def)
  );

  spike_skew #(.ROWS(M)) u_skew (
    .clk, .rst_n,
    .spike_i(spike_in),
    .spike_o(spk_row)
  );

  for (genvar c = 0; c < N; c++) begin : g_top
    assign psum[0][c] = '0;
  end

  for (genvar r = 0; r < M; r++) begin : g_r
    logic row_ld;
    assign row_ld = w_ld && (w_row == RW'(r));
    for (genvar c = 0; c < N; c++) begin : g_c
      logic [W-1:0] flip;
      logic [W-1:0] wgh_unused;
      assign flip = (flip_vld && flip_row == RW'(r) && flip_col == CW'(c)) ? flip_mask : '0;
      bnp_synapse #(.W(W), .PSUM_W(PSUM_W), .BOUND(BOUND)) u_syn (
        .clk, .rst_n,
        .wld    (row_ld),
        .wdata  (w_data[c]),
        .flip_i (flip),
        .wgh_th (wgh_th),
        .wgh_def(wgh_def),
        .spike_i(spk_row[r]),
        .psum_i (psum[r][c]),
        .psum_o (psum[r+1][c]),
        .wgh_o  (wgh_unused)
      );
    end
  end

  for (genvar c = 0; c < N; c++) begin : g_n
    logic [VMEM_W-1:0] vmem_unused;
    lif_neuron #(.IN_W(PSUM_W), .PROTECT(PROTECT)) u_neu (
      .clk, .rst_n,
      .p_ld     (p_ld),
      .i_vth    (p_set.vth),
      .i_vreset (p_set.vreset),
      .i_vleak  (p_set.vleak),
      .inj_vld  (nf_vld && nf_idx == CW'(c)),
      .inj_op   (nf_op),
      .i_wgh    (psum[M][c]),
      .out_spike(out_spike[c]),
      .protect_o(protect[c]),
      .vmem_o   (vmem_unused)
    );
  end

endmodule
