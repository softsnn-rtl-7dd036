// engine_check.svh: shared body of the compute-engine testbenches.
//
// The including module defines localparams M, N, STEPS, instantiates the
// engine as "dut" on the signals declared here, and provides the watchdog
// and the task finish_test() that prints the result and ends the run.
// The body loads random clean weights (0..WMAX), the bound registers
// (wgh_th = WMAX, wgh_def = WDEF) and neuron parameters, then runs random spike trains in phases:
//   1. clean run;
//   2. weight bit flips injected while the pipeline is empty, then a run;
//   3. faulty neuron operations (one of each kind) injected, then a run.
// A reference model computes each column sum with the bounding rule and
// steps one LIF neuron model per column, fed with the sum M cycles after
// its spike vector entered, and every output spike is compared every
// cycle. The mechanisms of the design are counted and each must occur:
// a bounded weight used in a sum, a blocked burst (protection), a
// refractory-suppressed cycle, and every kind of neuron fault.

  localparam int RW = (M > 1) ? $clog2(M) : 1;
  localparam int CW = (N > 1) ? $clog2(N) : 1;
  localparam int WMAX = 60;
  localparam int WDEF = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  logic bnd_ld, p_ld, w_ld, flip_vld, nf_vld;
  logic [7:0] bnd_th, bnd_def, flip_mask;
  nparam_t p_set;
  logic [RW-1:0] w_row, flip_row;
  logic [CW-1:0] flip_col, nf_idx;
  logic [7:0] w_data [N];
  nfault_e nf_op;
  logic [M-1:0] spike_in;
  logic [N-1:0] out_spike, protect;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // ---------------- reference model ----------------
  int w [M][N];
  int r_vm [N], r_tr [N], r_fault [N];
  bit r_sp [N];
  int r_th, r_rs, r_lk;
  int sums [$];   // column sums in flight, N per entry, oldest first
  int n_bounded = 0, n_blocked = 0, n_refr = 0, n_spikes = 0, n_cycles = 0;
  int n_fault [5] = '{0, 0, 0, 0, 0};

  function automatic int bnd(int x);
    return (x >= WMAX) ? WDEF : x;
  endfunction

  function automatic void push_sums(logic [M-1:0] s);
    for (int c = 0; c < N; c++) begin
      int acc = 0;
      for (int r = 0; r < M; r++)
        if (s[r]) begin
          acc += bnd(w[r][c]);
          if (w[r][c] >= WMAX) n_bounded++;
        end
      sums.push_back(acc);
    end
  endfunction

  function automatic void neuron_step(int c, int in);
    int nv; bit ge;
    ge = (r_vm[c] >= r_th);
    if (in != 0) nv = (r_fault[c] == 1) ? r_vm[c] : r_vm[c] + in;
    else if (r_fault[c] == 2) nv = r_vm[c];
    else nv = (r_vm[c] > r_lk) ? r_vm[c] - r_lk : 0;
    if (ge && r_fault[c] != 3) nv = r_rs;
    if (r_sp[c] && r_fault[c] != 3) r_tr[c] = 5;
    else if (r_tr[c] > 0) r_tr[c]--;
    r_sp[c] = ge && (r_fault[c] != 4);
    r_vm[c] = nv;
  endfunction

  function automatic bit neuron_out(int c);
    if ((r_vm[c] >= r_th) && r_sp[c]) return 0;
    return (r_tr[c] > 0) ? 0 : r_sp[c];
  endfunction

  task automatic idle_inputs();
    bnd_ld = 0; p_ld = 0; w_ld = 0; flip_vld = 0; nf_vld = 0; spike_in = '0;
  endtask

  // One clock: drive spikes s, advance the model, compare after the edge.
  task automatic cycle(logic [M-1:0] s);
    @(negedge clk);
    idle_inputs();
    spike_in = s;
    push_sums(s);
    @(posedge clk); #1;
    for (int c = 0; c < N; c++) begin
      int in = sums.pop_front();
      neuron_step(c, in);
    end
    n_cycles++;
    for (int c = 0; c < N; c++) begin
      bit exp_o = neuron_out(c);
      checks++;
      if (out_spike[c] !== exp_o) begin
        failures++;
        if (failures < 20) $display("FAIL cycle %0d neuron %0d: spike %0b expected %0b", n_cycles, c, out_spike[c], exp_o);
      end
      if (protect[c]) n_blocked++;
      if (r_sp[c] && r_tr[c] > 0) n_refr++;
      n_spikes += exp_o;
    end
  endtask

  task automatic run(int steps, int pct);
    for (int t = 0; t < steps; t++) begin
      logic [M-1:0] s;
      for (int r = 0; r < M; r++) s[r] = ($urandom_range(0, 99) < pct);
      cycle(s);
    end
    // drain the column pipeline
    for (int t = 0; t < M + 1; t++) cycle('0);
  endtask

  initial begin
    int vth;
    idle_inputs();
    bnd_th = 0; bnd_def = 0; flip_mask = 0; w_row = 0; flip_row = 0; flip_col = 0;
    nf_idx = 0; nf_op = NF_NONE; p_set = '0;
    for (int c = 0; c < N; c++) w_data[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // bound registers
    @(negedge clk); bnd_ld = 1; bnd_th = 8'(WMAX); bnd_def = 8'(WDEF);
    // weights, one row per cycle (clean weights stay below WMAX)
    for (int r = 0; r < M; r++) begin
      @(negedge clk); idle_inputs(); w_ld = 1; w_row = RW'(r);
      for (int c = 0; c < N; c++) begin
        w[r][c] = $urandom_range(0, WMAX - 1);
        w_data[c] = 8'(w[r][c]);
      end
    end
    // neuron parameters: threshold about four steps of average input
    vth = (M * 10 / 100) * (WMAX / 2) * 4 + 50;
    @(negedge clk); idle_inputs(); p_ld = 1;
    p_set.vth = VMEM_W'(vth); p_set.vreset = '0; p_set.vleak = VMEM_W'(2);
    r_th = vth; r_rs = 0; r_lk = 2;
    for (int c = 0; c < N; c++) begin r_vm[c] = 0; r_tr[c] = 0; r_sp[c] = 0; r_fault[c] = 0; end
    @(negedge clk); idle_inputs();
    // the pipeline registers hold zeros after reset: prime the model
    for (int k = 0; k < M * N; k++) sums.push_back(0);
    for (int t = 0; t < M + 1; t++) cycle('0);
    // phase 1: clean
    run(STEPS, 10);
    // phase 2: weight bit flips (high bits make hyper-active weights)
    for (int f = 0; f < (M * N) / 8 + 2; f++) begin
      int r, c, b;
      r = $urandom_range(0, M - 1); c = $urandom_range(0, N - 1); b = $urandom_range(5, 7);
      @(negedge clk); idle_inputs();
      flip_vld = 1; flip_row = RW'(r); flip_col = CW'(c); flip_mask = 8'(1 << b);
      w[r][c] = w[r][c] ^ (1 << b);
      push_sums('0);
      @(posedge clk); #1;
      for (int c2 = 0; c2 < N; c2++) neuron_step(c2, sums.pop_front());
    end
    run(STEPS, 10);
    // phase 3: one faulty operation of each kind on neurons 0..3 (mod N)
    for (int k = 1; k <= 4; k++) begin
      int c;
      c = (k - 1) % N;
      @(negedge clk); idle_inputs();
      nf_vld = 1; nf_idx = CW'(c); nf_op = nfault_e'(k);
      push_sums('0);
      @(posedge clk); #1;
      for (int c2 = 0; c2 < N; c2++) neuron_step(c2, sums.pop_front());
      r_fault[c] = k;
      n_fault[k]++;
    end
    run(STEPS, 10);
    $display("cycles=%0d spikes=%0d bounded_uses=%0d blocked=%0d refractory=%0d",
             n_cycles, n_spikes, n_bounded, n_blocked, n_refr);
    checks++; if (n_spikes == 0)  begin failures++; $display("FAIL no spikes"); end
    checks++; if (n_bounded == 0) begin failures++; $display("FAIL weight bounding never used"); end
    checks++; if (n_blocked == 0) begin failures++; $display("FAIL burst protection never acted"); end
    checks++; if (n_refr == 0)    begin failures++; $display("FAIL refractory period never seen"); end
    for (int k = 1; k <= 4; k++) begin
      checks++; if (n_fault[k] == 0) begin failures++; $display("FAIL fault %0d never injected", k); end
    end
    finish_test();
  end
