// tb_bnp_synapse: checks one bounded synapse and one unbounded (baseline)
// synapse against a reference: weight load, persistent bit flips, the
// bounding rule wgh_b = (wgh >= wgh_th) ? wgh_def : wgh, spike gating and
// the registered partial-sum addition (one cycle latency).
module tb_bnp_synapse;
  import softsnn_pkg::*;
  localparam int PW = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wld, spike;
  logic [7:0] wdata, flip, th, def, wq_b, wq_n;
  logic [PW-1:0] pin, pout_b, pout_n;
  int checks = 0, failures = 0;
  int bounded_seen = 0;

  bnp_synapse #(.PSUM_W(PW), .BOUND(1'b1)) dut_b (
    .clk, .rst_n, .wld, .wdata, .flip_i(flip), .wgh_th(th), .wgh_def(def),
    .spike_i(spike), .psum_i(pin), .psum_o(pout_b), .wgh_o(wq_b));
  bnp_synapse #(.PSUM_W(PW), .BOUND(1'b0)) dut_n (
    .clk, .rst_n, .wld, .wdata, .flip_i(flip), .wgh_th(th), .wgh_def(def),
    .spike_i(spike), .psum_i(pin), .psum_o(pout_n), .wgh_o(wq_n));

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w, eb, en;
    wld = 0; spike = 0; wdata = 0; flip = 0; th = 8'd100; def = 8'd7; pin = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    w = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      wld   = ($urandom_range(0, 7) == 0);
      wdata = 8'($urandom_range(0, 120));
      flip  = ($urandom_range(0, 9) == 0) ? 8'(1 << $urandom_range(0, 7)) : 8'h00;
      spike = $urandom_range(0, 1);
      pin   = PW'($urandom_range(0, 40000));
      if ($urandom_range(0, 50) == 0) begin
        th  = 8'($urandom_range(60, 200));
        def = 8'($urandom_range(0, 60));
      end
      // expected outputs after this edge
      eb = (w >= th) ? def : w;
      if (w >= th) bounded_seen++;
      en = w;
      eb = pin + (spike ? eb : 0);
      en = pin + (spike ? en : 0);
      w  = wld ? wdata : (w ^ flip);
      @(posedge clk); #1;
      check("psum bounded", pout_b, eb);
      check("psum baseline", pout_n, en);
      check("weight reg", wq_b, w);
    end
    // directed: the boundary weights wgh_th - 1 (kept) and wgh_th (replaced)
    for (int k = 0; k < 20; k++) begin
      int t;
      t = $urandom_range(1, 255);
      @(negedge clk);
      th = 8'(t); def = 8'($urandom_range(0, 50)); wld = 1; wdata = 8'(t); flip = 0; spike = 0; pin = 0;
      @(negedge clk);
      wld = 0; spike = 1; pin = PW'(1000);
      @(posedge clk); #1;
      check("weight == wgh_th is replaced", pout_b, 1000 + def);
      @(negedge clk);
      wld = 1; wdata = 8'(t - 1); spike = 0;
      @(negedge clk);
      wld = 0; spike = 1;
      @(posedge clk); #1;
      check("weight == wgh_th-1 is kept", pout_b, 1000 + t - 1);
    end
    checks++;
    if (bounded_seen == 0) begin failures++; $display("FAIL bounding never exercised"); end
    $display("bounded weights seen: %0d", bounded_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
