// spike_counter: per-neuron spike counters of the output layer (spk_clk domain).
//
// Counts the spikes of each of the N output neurons over an exposure window; the
// class whose neuron fired most is the result. clear (synchronous) starts a new
// window. Counters saturate at 2**CW - 1. The counter's role follows the source
// design; its width, saturation and clear are this design's choices, and picking the
// largest count is left to the host.
module spike_counter #(
  parameter int unsigned N  = 10,
  parameter int unsigned CW = 16
) (
  input  logic                 spk_clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic [N-1:0]         spk,
  output logic [N-1:0][CW-1:0] count
);
  always_ff @(posedge spk_clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
    end else begin
      for (int j = 0; j < N; j++) begin
        if (clear)                            count[j] <= '0;
        else if (spk[j] && (count[j] != '1))  count[j] <= count[j] + 1'b1;
      end
    end
  end
endmodule
