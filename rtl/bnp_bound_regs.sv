// bnp_bound_regs: the shared weight-bounding registers of the compute engine.
//
// One instance serves every synapse. It holds the weight threshold wgh_th
// and, for the BnP2/BnP3 variants, the replacement weight wgh_def. In
// silicon these are the radiation-hardened registers of the technique;
// hardening is a process property and is not modelled. For BnP1 the
// wgh_def register is not built and its output is the constant 0, as the
// paper's BnP1 replaces a bounded weight by zero.
//
// Interface: ld pulses load th_i/def_i on the next rising clock edge; the
// outputs are the register contents. Reset clears wgh_th to all ones
// (nothing is bounded until a threshold is loaded) and wgh_def to 0; the
// reset values are this design's choice.
module bnp_bound_regs
  import softsnn_pkg::*;
#(
  parameter bnp_e        BNP = BNP3,
  parameter int unsigned W   = WGH_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         ld,
  input  logic [W-1:0] th_i,
  input  logic [W-1:0] def_i,
  output logic [W-1:0] wgh_th,
  output logic [W-1:0] wgh_def
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  wgh_th <= '1;
    else if (ld) wgh_th <= th_i;
  end

  if (BNP == BNP1) begin : g_def_zero
    assign wgh_def = '0;
  end else begin : g_def_reg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  wgh_def <= '0;
      else if (ld) wgh_def <= def_i;
    end
  end

endmodule
