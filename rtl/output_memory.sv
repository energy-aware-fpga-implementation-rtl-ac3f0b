// output_memory: spikes of the output layer, per time step and counted over
// the time window.
//
// Like the hidden-layer buffer, the output spikes arrive serially, one output
// neuron per cycle (shift_en, spike_in, in_idx). They are shifted into an
// N-bit register (out_vec: bit j holds neuron j's spike of the latest time
// step) and each spike also increments that neuron's counter in counts[j].
// The counters saturate at their maximum and are zeroed by clear (start of an
// inference) or reset; CW bits count up to T_STEPS spikes.
//
// The output memory as a shift register of 1-bit spikes follows the paper.
// The spike counters are this design's reading of how the comparator turns
// spikes of several time steps into one class (the trained network's output
// is the class with most spikes over the window, the usual rate-code rule).
module output_memory #(
  parameter int unsigned N       = 2,
  parameter int unsigned T_STEPS = 25,
  localparam int unsigned IW     = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CW     = $clog2(T_STEPS + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   shift_en,
  input  logic                   spike_in,
  input  logic [IW-1:0]          in_idx,
  output logic [N-1:0]           out_vec,
  output logic [N-1:0][CW-1:0]   counts
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_vec <= '0;
      counts  <= '0;
    end else if (clear) begin
      out_vec <= '0;
      counts  <= '0;
    end else if (shift_en) begin
      out_vec <= (out_vec >> 1) | (N'(spike_in) << (N - 1));
      if (spike_in && int'(in_idx) < N && counts[in_idx] != '1)
        counts[in_idx] <= counts[in_idx] + 1'b1;
    end
  end

endmodule
