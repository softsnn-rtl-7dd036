// bnp_synapse: one synapse of the crossbar, with BnP weight bounding.
//
// The synapse stores an 8-bit weight in its local weight register. The
// stored weight is compared with the engine-wide threshold wgh_th; when
// wgh >= wgh_th it is replaced by wgh_def (paper Eq. 1: the bounding
// comparator and 2:1 multiplexer added to each synapse). The bounded weight
// passes a second multiplexer that selects it when the row's input spike
// is 1 and 0 otherwise, is added to the partial sum arriving from the
// synapse above in the same column, and the result is registered and sent
// down the column. The top row of a column is fed psum_i = 0, which is the
// same as the adder-less first row drawn in the paper.
//
// Fault hook: flip_i is XORed into the weight register every cycle it is
// non-zero, modelling a soft error as a bit flip that persists until the
// register is written again (wld). A chip ties it to 0.
//
// BOUND = 0 builds the unprotected baseline synapse (no comparator/mux),
// kept for comparing with and without mitigation.
//
// Timing: wld writes the weight on the next edge; psum_o is the registered
// sum psum_i + (spike_i ? bounded weight : 0), one cycle after its inputs.
// Reset clears the weight and the partial sum (own choice).
module bnp_synapse
  import softsnn_pkg::*;
#(
  parameter int unsigned W      = WGH_W,
  parameter int unsigned PSUM_W = psum_width(M_ROWS),
  parameter bit          BOUND  = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  // weight load and soft-error hook
  input  logic              wld,
  input  logic [W-1:0]      wdata,
  input  logic [W-1:0]      flip_i,
  // shared bounding registers
  input  logic [W-1:0]      wgh_th,
  input  logic [W-1:0]      wgh_def,
  // datapath
  input  logic              spike_i,
  input  logic [PSUM_W-1:0] psum_i,
  output logic [PSUM_W-1:0] psum_o,
  output logic [W-1:0]      wgh_o     // stored (possibly corrupted) weight
);

  logic [W-1:0] wgh_q;
  logic [W-1:0] wgh_b;
  logic [W-1:0] wgh_sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    wgh_q <= '0;
    else if (wld)  wgh_q <= wdata;
    else           wgh_q <= wgh_q ^ flip_i;
  end

  // Weight bounding (Eq. 1).
  if (BOUND) begin : g_bound
    assign wgh_b = (wgh_q >= wgh_th) ? wgh_def : wgh_q;
  end else begin : g_nobound
    assign wgh_b = wgh_q;
  end

  assign wgh_sel = spike_i ? wgh_b : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) psum_o <= '0;
    else        psum_o <= psum_i + PSUM_W'(wgh_sel);
  end

  assign wgh_o = wgh_q;

endmodule
