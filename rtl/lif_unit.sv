// lif_unit: first-order leaky integrate-and-fire neuron hardware unit,
// time-multiplexed over the N neurons of one layer.
//
// Each cycle with in_valid the unit updates neuron in_idx by
//     I      = in_sum + in_bias                 (adder-tree result plus bias)
//     U'     = sat( (U >>> beta_shift) + I - u_rest )
//     spike  = (U' >= threshold) and the neuron is not refractory
//     U_next = spike ? 0 : U'
// which is U[t+1] = beta*U[t] + I[t+1] - U_rest with beta = 2^-beta_shift.
// The potential U of every neuron is kept in a register per neuron (Q1.15);
// sat() clamps to the Q1.15 range [-1, 1). After a spike the neuron cannot
// fire for REFRAC further time steps (its updates of those steps still
// integrate) when cfg.refrac_en is set.
//
// Timing: out_spike, out_u, out_sat and out_blocked are combinational from
// the inputs of the same cycle; the neuron's state is written at the clock
// edge, so one neuron is finished per cycle. clear (or reset) zeroes every
// potential and refractory counter, as at the start of an inference.
//
// From the paper: the adder / register / shift / comparator structure, the
// equation above, bias added after the adder tree, reset to 0 on a spike,
// the firing rule "reaching or surpassing" the threshold, Q1.15 states
// confined to [-1, 1), and a 5-step refractory period. Own choices: the
// leak as a pure arithmetic right shift (only ">>" is shown, beta is not
// given), saturation as the way to stay in range, threshold, u_rest and the
// shift as runtime settings, and the refractory counter per neuron.
module lif_unit
  import snn_pkg::*;
#(
  parameter int unsigned N      = 512,
  parameter int unsigned SUM_W  = 28,
  parameter int unsigned REFRAC = 5,
  localparam int unsigned IW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned RW    = $clog2(REFRAC + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  lif_cfg_t                cfg,
  input  logic                    in_valid,
  input  logic [IW-1:0]           in_idx,
  input  logic signed [SUM_W-1:0] in_sum,
  input  logic signed [Q_W-1:0]   in_bias,
  output logic                    out_spike,
  output logic signed [Q_W-1:0]   out_u,
  output logic                    out_sat,
  output logic                    out_blocked
);

  logic signed [Q_W-1:0] u_mem [N];
  logic [RW-1:0]         r_mem [N];

  logic signed [Q_W-1:0] u_cur, leak;
  logic [RW-1:0]         r_cur;
  logic signed [47:0]    v;
  logic                  fire;

  always_comb begin
    u_cur = u_mem[in_idx];
    r_cur = r_mem[in_idx];
    leak  = u_cur >>> cfg.beta_shift;
    v     = 48'(leak) + 48'(in_sum) + 48'(in_bias) - 48'(cfg.u_rest);
    out_u = sat_q15(v);
    out_sat     = in_valid && (v > 48'sd32767 || v < -48'sd32768);
    fire        = in_valid && (out_u >= cfg.threshold);
    out_blocked = fire && cfg.refrac_en && (r_cur != '0);
    out_spike   = fire && !out_blocked;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N); i++) begin
        u_mem[i] <= '0;
        r_mem[i] <= '0;
      end
    end else if (clear) begin
      for (int i = 0; i < int'(N); i++) begin
        u_mem[i] <= '0;
        r_mem[i] <= '0;
      end
    end else if (in_valid && int'(in_idx) < N) begin
      u_mem[in_idx] <= out_spike ? '0 : out_u;
      if (!cfg.refrac_en)      r_mem[in_idx] <= '0;
      else if (out_spike)      r_mem[in_idx] <= RW'(REFRAC);
      else if (r_cur != '0)    r_mem[in_idx] <= r_cur - 1'b1;
    end
  end

endmodule
