// spike_skew: input-spike alignment for the pipelined synapse columns.
//
// Each synapse registers its column's partial sum, so the sum for one time
// step reaches row r of the crossbar r cycles after it leaves row 0. This
// block delays input spike r by r cycles so that every row adds the spike
// of the same time step, letting a new spike vector enter every cycle. It
// is this design's own addition: the paper draws the pipeline registers
// but not how input spikes are aligned with them.
//
// Interface: spike_i[r] in cycle t appears on spike_o[r] in cycle t+r; row 0
// needs no delay and is a plain wire from input to output.
// Reset clears the delay lines.
module spike_skew #(
  parameter int unsigned ROWS = 256
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [ROWS-1:0] spike_i,
  output logic [ROWS-1:0] spike_o
);

  assign spike_o[0] = spike_i[0];

  for (genvar r = 1; r < ROWS; r++) begin : g_row
    logic [r-1:0] line;
    if (r == 1) begin : g_one
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) line <= '0;
        else        line <= spike_i[r];
      end
    end else begin : g_many
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) line <= '0;
        else        line <= {line[r-2:0], spike_i[r]};
      end
    end
    assign spike_o[r] = line[r-1];
  end

endmodule
