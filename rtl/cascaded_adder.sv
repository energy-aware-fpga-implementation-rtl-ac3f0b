// cascaded_adder: multiplier-free synaptic sum of one neuron.
//
// Inputs are binary spikes, so the product spike * weight is a 2:1
// multiplexer choosing the weight or 0. The N selected Q1.15 weights are then
// summed by a balanced binary tree of adders: N/2 adders in the first level,
// N/4 in the second, and so on to one adder (N is padded with zeros to a power
// of two). The tree is purely combinational, so one neuron's sum is produced
// per clock cycle. The result is signed, SUM_W bits, with the same 15
// fraction bits as the weights; with SUM_W >= W_W + log2(N) no sum can
// overflow (4096 inputs: 16 + 12 = 28 bits).
//
// Interface: in_spikes[i] gates in_weights[i]; sum is combinational.
//
// The multiplexer-then-adder-tree structure, the 4096 inputs, the 16-bit
// weights and the 28-bit result follow the paper. Any pipelining of the tree
// is left out here (the paper's phase timing is one neuron per cycle).
module cascaded_adder #(
  parameter int unsigned N     = 4096,
  parameter int unsigned W_W   = 16,
  parameter int unsigned SUM_W = 28,
  localparam int unsigned LV   = (N > 1) ? $clog2(N) : 1,  // tree levels
  localparam int unsigned P    = 1 << LV                     // padded leaf count
) (
  input  logic [N-1:0]              in_spikes,
  input  logic [N-1:0][W_W-1:0]     in_weights,
  output logic signed [SUM_W-1:0]   sum
);

  // Level 0: the multiplexers ("0" or "Weight" selected by the input pixel).
  logic signed [SUM_W-1:0] leaf [P];

  always_comb begin
    for (int i = 0; i < int'(P); i++) begin
      if (i < int'(N) && in_spikes[i]) leaf[i] = SUM_W'($signed(in_weights[i]));
      else                             leaf[i] = '0;
    end
  end

  // Levels 1..LV: adders, each summing two results of the level below.
  for (genvar l = 1; l <= int'(LV); l++) begin : g_lvl
    localparam int unsigned M = P >> l;
    logic signed [SUM_W-1:0] s [M];
    for (genvar k = 0; k < int'(M); k++) begin : g_add
      if (l == 1) begin : g_first
        assign s[k] = leaf[2*k] + leaf[2*k+1];
      end else begin : g_next
        assign s[k] = g_lvl[l-1].s[2*k] + g_lvl[l-1].s[2*k+1];
      end
    end
  end

  assign sum = g_lvl[LV].s[0];

  initial begin
    assert (N >= 2) else $error("cascaded_adder needs at least two inputs");
    assert (SUM_W >= W_W + LV) else $warning("SUM_W may overflow for N inputs");
  end

endmodule
