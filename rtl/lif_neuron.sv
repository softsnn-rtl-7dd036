// lif_neuron: leaky integrate-and-fire neuron with BnP burst protection.
//
// Registers: Vmem, the parameter registers Vth, Vreset and Vleak (Vleak
// holds the negated leak, so the leak is an addition), the refractory
// counter T_ref and the spike register. Every clock cycle:
//   * Vmem increase: if the column input i_wgh is non-zero, Vmem + i_wgh.
//   * Vmem leak: if i_wgh is zero, Vmem - leak when Vmem > leak, else 0.
//   * Vmem reset: if Vmem >= Vth, Vmem takes Vreset instead, the spike
//     register is set, and on the cycle after a spike T_ref is loaded with
//     T_REF (5) and then counts down to 0.
//   * Spike generation: out_spike = spike register, forced to 0 while
//     T_ref > 0.
// This is the datapath of the paper's neuron figure.
//
// Protection (BnP, PROTECT = 1): a working reset makes Vmem >= Vth true for
// a single cycle. When the comparison is true now and the spike register
// (last cycle's comparison) is also 1, the reset has failed; an AND of the
// two drives a final multiplexer that forces out_spike to 0, so a neuron
// stuck above threshold cannot emit a burst. protect_o reports that AND.
//
// Fault hook (soft-error model): inj_vld with inj_op records a faulty
// operation in a sticky fault register; the fault persists until a new
// parameter set is loaded (p_ld), as in the paper's fault model. NF_VR
// disables both the Vmem reset and the refractory counter, the two parts
// of the 'Vmem reset' block. A chip ties inj_vld to 0.
//
// Interface and timing: p_ld loads the parameters, clears Vmem to the new
// Vreset, T_ref, the spike register and any fault on the next edge (own
// choice). The neuron updates every cycle; a threshold crossing seen on
// Vmem in cycle t appears on out_spike in cycle t+1. Vmem wraps if it
// exceeds VMEM_W bits, which cannot happen while Vth + one column sum fits.
module lif_neuron
  import softsnn_pkg::*;
#(
  parameter int unsigned IN_W    = psum_width(M_ROWS),
  parameter int unsigned V_W     = VMEM_W,
  parameter int unsigned TREF    = T_REF,
  parameter int unsigned TR_W    = TREF_W,
  parameter bit          PROTECT = 1'b1
) (
  input  logic            clk,
  input  logic            rst_n,
  // parameter load
  input  logic            p_ld,
  input  logic [V_W-1:0]  i_vth,
  input  logic [V_W-1:0]  i_vreset,
  input  logic [V_W-1:0]  i_vleak,
  // soft-error hook
  input  logic            inj_vld,
  input  nfault_e         inj_op,
  // input from the synapse column
  input  logic [IN_W-1:0] i_wgh,
  output logic            out_spike,
  output logic            protect_o,
  output logic [V_W-1:0]  vmem_o
);

  logic [V_W-1:0]  vmem, vth, vreset, vleak;
  logic [TR_W-1:0] tref;
  logic            spike;
  nfault_e         fault;

  logic [V_W-1:0] v_inc, v_leak, v_int, v_next, leak_mag;
  logic           ge_th, leak_gt, tref_gt0;

  assign leak_mag = -vleak;
  assign ge_th    = (vmem >= vth);
  assign leak_gt  = (vmem > leak_mag);
  assign tref_gt0 = (tref != '0);

  always_comb begin
    // Vmem increase
    v_inc  = (fault == NF_VI) ? vmem : vmem + V_W'(i_wgh);
    // Vmem leak (floored at 0)
    v_leak = (fault == NF_VL) ? vmem : (leak_gt ? vmem + vleak : '0);
    // integrate or leak
    v_int  = (i_wgh == '0) ? v_leak : v_inc;
    // Vmem reset
    v_next = (ge_th && fault != NF_VR) ? vreset : v_int;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vth    <= '1;
      vreset <= '0;
      vleak  <= '0;
      vmem   <= '0;
      tref   <= '0;
      spike  <= 1'b0;
      fault  <= NF_NONE;
    end else if (p_ld) begin
      vth    <= i_vth;
      vreset <= i_vreset;
      vleak  <= -i_vleak;
      vmem   <= i_vreset;
      tref   <= '0;
      spike  <= 1'b0;
      fault  <= NF_NONE;
    end else begin
      vmem  <= v_next;
      spike <= ge_th && (fault != NF_SG);
      if (spike && fault != NF_VR) tref <= TR_W'(TREF);
      else if (tref_gt0)           tref <= tref - 1'b1;
      if (inj_vld)                 fault <= inj_op;
    end
  end

  logic spk_ref;
  assign spk_ref   = tref_gt0 ? 1'b0 : spike;
  assign protect_o = PROTECT && ge_th && spike;
  assign out_spike = protect_o ? 1'b0 : spk_ref;
  assign vmem_o    = vmem;

endmodule
