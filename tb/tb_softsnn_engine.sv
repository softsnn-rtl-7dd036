// tb_softsnn_engine: end-to-end test of the compute engine at a reduced
// size (16 inputs x 8 neurons), BnP3 build. See engine_check.svh for the
// sequence and the reference model.
module tb_softsnn_engine;
  import softsnn_pkg::*;
  localparam int M = 16;
  localparam int N = 8;
  localparam int STEPS = 400;

`include "engine_check.svh"

  task automatic finish_test();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  // watchdog
  initial begin
    #(64'd10 * (64'd20 * STEPS + 64'd20 * M + 64'd2000));
    failures++;
    $display("watchdog expired");
    finish_test();
  end

  softsnn_engine #(.M(M), .N(N)) dut (
    .clk, .rst_n, .bnd_ld, .bnd_th, .bnd_def, .p_ld, .p_set,
    .w_ld, .w_row, .w_data, .flip_vld, .flip_row, .flip_col, .flip_mask,
    .nf_vld, .nf_idx, .nf_op, .spike_in, .out_spike, .protect);
endmodule
