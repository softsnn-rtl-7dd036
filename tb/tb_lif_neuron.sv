// tb_lif_neuron: checks the protected LIF neuron cycle by cycle against a
// reference model, under random inputs, parameter loads and injected
// faulty operations; a second, unprotected neuron runs alongside. Then
// directed tests: a healthy neuron fires once per threshold crossing and
// stays silent for the 5-cycle refractory period; with a faulty 'Vmem
// reset' the unprotected neuron bursts and the protected one stays silent.
module tb_lif_neuron;
  import softsnn_pkg::*;
  localparam int IW = 16, VW = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  logic p_ld, inj_vld;
  nfault_e inj_op;
  logic [VW-1:0] vth, vrst, vlk;
  logic [IW-1:0] wgh;
  logic sp_p, sp_u, pr_p, pr_u;
  logic [VW-1:0] vm_p, vm_u;
  int checks = 0, failures = 0;

  lif_neuron #(.IN_W(IW), .PROTECT(1'b1)) dut_p (
    .clk, .rst_n, .p_ld, .i_vth(vth), .i_vreset(vrst), .i_vleak(vlk),
    .inj_vld, .inj_op, .i_wgh(wgh), .out_spike(sp_p), .protect_o(pr_p), .vmem_o(vm_p));
  lif_neuron #(.IN_W(IW), .PROTECT(1'b0)) dut_u (
    .clk, .rst_n, .p_ld, .i_vth(vth), .i_vreset(vrst), .i_vleak(vlk),
    .inj_vld, .inj_op, .i_wgh(wgh), .out_spike(sp_u), .protect_o(pr_u), .vmem_o(vm_u));

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  // reference model state
  int r_vm, r_th, r_rs, r_lk, r_tr, r_fault;
  bit r_sp;

  function automatic void ref_step(bit ld, int nth, int nrs, int nlk, bit inj, int op, int in);
    int nv; bit ge;
    if (ld) begin
      r_th = nth; r_rs = nrs; r_lk = nlk; r_vm = nrs; r_tr = 0; r_sp = 0; r_fault = 0;
      return;
    end
    ge = (r_vm >= r_th);
    if (in != 0) nv = (r_fault == 1) ? r_vm : r_vm + in;
    else if (r_fault == 2) nv = r_vm;
    else nv = (r_vm > r_lk) ? r_vm - r_lk : 0;
    if (ge && r_fault != 3) nv = r_rs;
    if (r_sp && r_fault != 3) r_tr = 5;
    else if (r_tr > 0) r_tr--;
    r_sp = ge && (r_fault != 4);
    r_vm = nv;
    if (inj) r_fault = op;
  endfunction

  function automatic bit ref_out(bit protect);
    bit ge = (r_vm >= r_th);
    if (protect && ge && r_sp) return 0;
    return (r_tr > 0) ? 0 : r_sp;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int spikes_p, spikes_u, blocked;

  task automatic load(int t, int rs, int lk);
    @(negedge clk);
    p_ld = 1; vth = VW'(t); vrst = VW'(rs); vlk = VW'(lk); inj_vld = 0; wgh = 0;
    ref_step(1, t, rs, lk, 0, 0, 0);
    @(posedge clk); #1;
    p_ld = 0;
  endtask

  initial begin
    int cyc_last, gaps_bad;
    p_ld = 0; inj_vld = 0; inj_op = NF_NONE; vth = 0; vrst = 0; vlk = 0; wgh = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    load(1000, 0, 3);
    // ---------------- random phase ----------------
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      if ($urandom_range(0, 400) == 0) begin
        int t, rs, lk;
        t = $urandom_range(200, 3000);
        rs = $urandom_range(0, 100);
        lk = $urandom_range(0, 20);
        p_ld = 1; vth = VW'(t); vrst = VW'(rs); vlk = VW'(lk); inj_vld = 0; wgh = 0;
        ref_step(1, t, rs, lk, 0, 0, 0);
      end else begin
        p_ld = 0;
        inj_vld = ($urandom_range(0, 300) == 0);
        inj_op = nfault_e'($urandom_range(0, 4));
        wgh = ($urandom_range(0, 2) == 0) ? '0 : IW'($urandom_range(1, 300));
        ref_step(0, 0, 0, 0, inj_vld, int'(inj_op), int'(wgh));
      end
      @(posedge clk); #1;
      check("vmem", int'(vm_p), r_vm);
      check("spike protected", sp_p, ref_out(1));
      check("spike unprotected", sp_u, ref_out(0));
      if (pr_p) blocked++;
    end
    p_ld = 0; inj_vld = 0;
    // ---------------- healthy neuron: refractory ----------------
    load(100, 0, 0);
    spikes_p = 0; cyc_last = -100; gaps_bad = 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk); wgh = 16'd60;
      @(posedge clk); #1;
      if (sp_p) begin
        if (i - cyc_last < 6) gaps_bad++;
        cyc_last = i; spikes_p++;
      end
    end
    checks++; if (spikes_p == 0) begin failures++; $display("FAIL healthy neuron never fired"); end
    check("refractory gaps >= 6 cycles", gaps_bad, 0);
    // ---------------- faulty 'Vmem reset': burst vs protection ----------------
    load(100, 0, 0);
    @(negedge clk); inj_vld = 1; inj_op = NF_VR; wgh = 0;
    @(posedge clk); #1; inj_vld = 0;
    spikes_p = 0; spikes_u = 0; blocked = 0;
    for (int i = 0; i < 100; i++) begin
      @(negedge clk); wgh = 16'd60;
      @(posedge clk); #1;
      spikes_p += sp_p; spikes_u += sp_u; blocked += pr_p;
    end
    $display("faulty reset: unprotected spikes=%0d protected spikes=%0d blocked cycles=%0d",
             spikes_u, spikes_p, blocked);
    checks++; if (spikes_u < 50) begin failures++; $display("FAIL unprotected neuron did not burst"); end
    check("protected neuron silent under faulty reset", spikes_p, 0);
    checks++; if (blocked == 0) begin failures++; $display("FAIL protection never acted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
