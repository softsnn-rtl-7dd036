// tb_bnp_bound_regs: checks the shared bounding registers for the BnP3
// build (wgh_th and wgh_def both loadable) and the BnP1 build (wgh_def is
// constant 0): reset values, load, and hold while ld is low.
module tb_bnp_bound_regs;
  import softsnn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, ld = 1'b0;
  logic [7:0] th, df, th3, df3, th1, df1;
  int checks = 0, failures = 0;

  bnp_bound_regs #(.BNP(BNP3)) dut3 (.clk, .rst_n, .ld, .th_i(th), .def_i(df), .wgh_th(th3), .wgh_def(df3));
  bnp_bound_regs #(.BNP(BNP1)) dut1 (.clk, .rst_n, .ld, .th_i(th), .def_i(df), .wgh_th(th1), .wgh_def(df1));

  always #5 clk = ~clk;

  task automatic check(string what, logic [7:0] got, logic [7:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] eth, edf;
    th = '0; df = '0;
    repeat (2) @(posedge clk);
    check("reset th3", th3, 8'hff);
    check("reset df3", df3, 8'h00);
    check("reset th1", th1, 8'hff);
    rst_n = 1'b1;
    eth = 8'hff; edf = 8'h00;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      ld = ($urandom_range(0, 3) == 0);
      th = 8'($urandom);
      df = 8'($urandom);
      if (ld) begin eth = th; edf = df; end
      @(posedge clk); #1;
      check("th3", th3, eth);
      check("df3", df3, edf);
      check("th1", th1, eth);
      check("df1 is zero", df1, 8'h00);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
