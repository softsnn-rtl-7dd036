// tb_spike_skew: drives random spike vectors into an 8-row skew line and
// checks that row r reproduces its input exactly r cycles later.
module tb_spike_skew;
  localparam int R = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [R-1:0] si, so;
  logic [R-1:0] hist [$];
  int checks = 0, failures = 0;

  spike_skew #(.ROWS(R)) dut (.clk, .rst_n, .spike_i(si), .spike_o(so));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    si = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < R; k++) hist.push_front('0);
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      si = R'($urandom);
      hist.push_front(si);       // hist[d] = vector applied d cycles ago
      #1;
      for (int r = 0; r < R; r++) begin
        checks++;
        if (so[r] !== hist[r][r]) begin
          failures++;
          $display("FAIL row %0d cycle %0d", r, i);
        end
      end
      void'(hist.pop_back());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
