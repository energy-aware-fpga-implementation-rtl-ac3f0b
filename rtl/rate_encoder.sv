// rate_encoder: rate coding of grey-level pixels into Bernoulli spikes.
//
// Each accepted pixel produces one spike bit in the same cycle. The spike is
// 1 with probability equal to the normalised pixel intensity: a 16-bit
// maximal-length LFSR (x^16 + x^14 + x^13 + x^11 + 1) supplies a fresh
// PIX_W-bit random number r per pixel and the spike is (r < pixel). A pixel at
// full scale (all ones) always spikes and a pixel of 0 never spikes, so black
// gives p = 0, white p = 1 and mid-grey about p = 0.5, as rate coding asks.
// Repeating the same image over the time steps gives a new random draw each
// time, hence a Bernoulli spike train per pixel.
//
// Interface: in_valid/in_pixel present a pixel; out_spike is combinational
// from them and the LFSR; the LFSR advances on every accepted pixel.
// seed_load reloads SEED so that a run can be repeated exactly.
//
// The coding rule (probability = normalised intensity, one draw per pixel and
// time step) follows the paper. The pixel width, the LFSR as random source,
// its polynomial and seed, and the "all ones always spikes" rule are choices
// of this design.
module rate_encoder #(
  parameter int unsigned PIX_W = 8,
  parameter logic [15:0] SEED  = 16'hACE1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             seed_load,
  input  logic             in_valid,
  input  logic [PIX_W-1:0] in_pixel,
  output logic             out_spike
);

  logic [15:0] lfsr;
  logic        fb;

  assign fb = lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          lfsr <= SEED;
    else if (seed_load)  lfsr <= SEED;
    else if (in_valid)   lfsr <= {lfsr[14:0], fb};
  end

  always_comb begin
    if (&in_pixel) out_spike = in_valid;
    else           out_spike = in_valid && (lfsr[PIX_W-1:0] < in_pixel);
  end

  initial begin
    assert (PIX_W >= 1 && PIX_W <= 16) else $error("PIX_W must be 1..16");
    assert (SEED != 16'h0) else $error("LFSR seed must be non-zero");
  end

endmodule
