// spike_shift_register: serial-to-parallel buffer for the spikes of a layer.
//
// The time-multiplexed LIF unit produces one neuron's 1-bit spike per cycle.
// Each cycle with shift_en the new spike enters at the top (bit N-1) and the
// register moves one place toward bit 0, so after N shifts the spike of neuron
// j (the j-th produced) sits in bit j. The parallel vector out_vec then feeds
// the N inputs of the next layer's cascaded adder. clear (or reset) zeroes it.
//
// The 1 x (Nu)L2 one-bit shift register between the layers follows the paper;
// the shift direction is this design's choice.
module spike_shift_register #(
  parameter int unsigned N = 512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         shift_en,
  input  logic         spike_in,
  output logic [N-1:0] out_vec
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_vec <= '0;
    else if (clear)    out_vec <= '0;
    else if (shift_en) begin
      out_vec <= (out_vec >> 1) | (N'(spike_in) << (N - 1));
    end
  end

endmodule
