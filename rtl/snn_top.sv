// snn_top: 4096-512-2 spiking neural network accelerator with first-order
// LIF neurons, classifying a 64x64 grey image as collision / no collision.
//
// Dataflow of one time step (repeated T_STEPS times per inference):
//   host pixels -> rate_encoder -> input_memory (1 bit per pixel)
//   PHASE1: for each hidden neuron j, one per cycle: weight row j of layer 1
//           -> cascaded_adder (4096 mux + adder tree, 28-bit sum)
//           -> lif_unit (hidden layer) -> 1-bit spike -> spike_shift_register
//   PHASE2: for each output neuron, one per cycle: weight row of layer 2
//           -> cascaded_adder (512 inputs) -> lif_unit (output layer)
//           -> output_memory (spike shift register and spike counters)
// After the last step, PHASE3: class_comparator picks the output neuron
// with most spikes; class_out is valid while done is high.
//
// Host interface:
//   * weight/bias load (wl_*), one 16-bit Q1.15 value per cycle, while idle:
//     wl_layer 0 = hidden layer (row = hidden neuron, col = pixel),
//     wl_layer 1 = output layer (row = output neuron, col = hidden neuron),
//     wl_bias 1 writes the bias of row instead of a weight;
//   * cfg_hid / cfg_out: threshold, resting potential, leak shift and
//     refractory enable of each layer, held stable during an inference;
//   * start (while idle), then IMG_SIZE pixels per time step with a
//     valid/ready handshake, in raster order, the same image every step;
//   * done pulses for one cycle with class_out and spike_counts valid.
//   * hid_* / out_* expose each neuron update as it happens (potential after
//     the update, spike, saturation, refractory suppression), for observation.
// Latency per time step: IMG_SIZE load cycles + (NU_L2 + 1) + (NU_L3 + 1);
// after the last step NU_L3 + 2 cycles to done.
//
// The layer sizes, the block structure (input and weight memories, cascaded
// adders, LIF units, shift register, output memory, comparator, control unit)
// and the phase order follow the paper; interface protocols and everything
// listed as a choice in the submodules are this design's.
module snn_top
  import snn_pkg::*;
#(
  parameter int unsigned IMG_SIZE = IMG_SIZE_D,
  parameter int unsigned NU_L2    = NU_L2_D,
  parameter int unsigned NU_L3    = NU_L3_D,
  parameter int unsigned T_STEPS  = T_STEPS_D,
  parameter int unsigned REFRAC   = REFRAC_D,
  parameter int unsigned PIX_W    = PIX_W_D,
  parameter int unsigned SUM_W    = SUM_W_D,
  localparam int unsigned AW      = (IMG_SIZE > 1) ? $clog2(IMG_SIZE) : 1,
  localparam int unsigned H_AW    = (NU_L2 > 1) ? $clog2(NU_L2) : 1,
  localparam int unsigned O_AW    = (NU_L3 > 1) ? $clog2(NU_L3) : 1,
  localparam int unsigned CW      = $clog2(T_STEPS + 1),
  localparam int unsigned SW      = $clog2(T_STEPS + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // weight and bias load
  input  logic                   wl_en,
  input  logic                   wl_layer,
  input  logic                   wl_bias,
  input  logic [H_AW-1:0]        wl_row,
  input  logic [AW-1:0]          wl_col,
  input  logic signed [Q_W-1:0]  wl_data,
  // layer settings
  input  lif_cfg_t               cfg_hid,
  input  lif_cfg_t               cfg_out,
  // inference control and pixel stream
  input  logic                   start,
  input  logic                   pix_valid,
  input  logic [PIX_W-1:0]       pix_data,
  output logic                   pix_ready,
  output logic                   busy,
  output logic                   done,
  output logic [O_AW-1:0]        class_out,
  output logic [CW-1:0]          class_count,
  output logic [NU_L3-1:0]       out_step_spikes,
  output logic [NU_L3-1:0][CW-1:0] spike_counts,
  output logic [SW-1:0]          step,
  output ctrl_state_e            state,
  // neuron-update observation
  output logic                   hid_valid,
  output logic [H_AW-1:0]        hid_idx,
  output logic                   hid_spike,
  output logic                   hid_sat,
  output logic                   hid_blocked,
  output logic signed [Q_W-1:0]  hid_u,
  output logic                   out_valid,
  output logic [O_AW-1:0]        out_idx,
  output logic                   out_spike,
  output logic                   out_sat,
  output logic                   out_blocked,
  output logic signed [Q_W-1:0]  out_u
);

  // ---------------- control ----------------
  logic            clear, seed_load, in_wr_en, cls_start, cls_done;
  logic            cls_busy;
  logic [AW-1:0]   in_wr_addr;
  logic            l1_rd_en, l2_rd_en;
  logic [H_AW-1:0] l1_rd_row;
  logic [O_AW-1:0] l2_rd_row;

  control_unit #(
    .IMG_SIZE(IMG_SIZE), .NU_L2(NU_L2), .NU_L3(NU_L3), .T_STEPS(T_STEPS)
  ) u_ctrl (
    .clk, .rst_n, .start, .pix_valid, .pix_ready, .clear, .seed_load,
    .in_wr_en, .in_wr_addr, .l1_rd_en, .l1_rd_row, .l2_rd_en, .l2_rd_row,
    .cls_start, .cls_done, .busy, .done, .step, .state
  );

  // ---------------- input coding and input memory ----------------
  logic                spike_px;
  logic [IMG_SIZE-1:0] frame;

  rate_encoder #(.PIX_W(PIX_W)) u_enc (
    .clk, .rst_n, .seed_load, .in_valid(in_wr_en), .in_pixel(pix_data),
    .out_spike(spike_px)
  );

  input_memory #(.IMG_SIZE(IMG_SIZE)) u_in_mem (
    .clk, .rst_n, .wr_en(in_wr_en), .wr_addr(in_wr_addr), .wr_data(spike_px),
    .rd_frame(frame)
  );

  // ---------------- layer 1: 4096 -> 512 ----------------
  logic                          l1_valid;
  logic [H_AW-1:0]               l1_tag;
  logic [IMG_SIZE-1:0][Q_W-1:0]  l1_w;
  logic signed [Q_W-1:0]         l1_b;
  logic signed [SUM_W-1:0]       l1_sum;

  weight_memory #(.NROWS(NU_L2), .NCOLS(IMG_SIZE), .W_W(Q_W)) u_wmem1 (
    .clk, .rst_n,
    .wr_en(wl_en && !wl_layer), .wr_bias(wl_bias), .wr_row(wl_row), .wr_col(wl_col),
    .wr_data(wl_data),
    .rd_en(l1_rd_en), .rd_row(l1_rd_row), .rd_valid(l1_valid), .rd_tag(l1_tag),
    .rd_weights(l1_w), .rd_bias(l1_b)
  );

  cascaded_adder #(.N(IMG_SIZE), .W_W(Q_W), .SUM_W(SUM_W)) u_add1 (
    .in_spikes(frame), .in_weights(l1_w), .sum(l1_sum)
  );

  lif_unit #(.N(NU_L2), .SUM_W(SUM_W), .REFRAC(REFRAC)) u_lif_hid (
    .clk, .rst_n, .clear, .cfg(cfg_hid), .in_valid(l1_valid), .in_idx(l1_tag),
    .in_sum(l1_sum), .in_bias(l1_b), .out_spike(hid_spike), .out_u(hid_u),
    .out_sat(hid_sat), .out_blocked(hid_blocked)
  );

  logic [NU_L2-1:0] hid_vec;

  spike_shift_register #(.N(NU_L2)) u_hid_sr (
    .clk, .rst_n, .clear, .shift_en(l1_valid), .spike_in(hid_spike), .out_vec(hid_vec)
  );

  // ---------------- layer 2: 512 -> 2 ----------------
  logic                        l2_valid;
  logic [O_AW-1:0]             l2_tag;
  logic [NU_L2-1:0][Q_W-1:0]   l2_w;
  logic signed [Q_W-1:0]       l2_b;
  logic signed [SUM_W-1:0]     l2_sum;

  weight_memory #(.NROWS(NU_L3), .NCOLS(NU_L2), .W_W(Q_W)) u_wmem2 (
    .clk, .rst_n,
    .wr_en(wl_en && wl_layer), .wr_bias(wl_bias), .wr_row(O_AW'(wl_row)),
    .wr_col(H_AW'(wl_col)), .wr_data(wl_data),
    .rd_en(l2_rd_en), .rd_row(l2_rd_row), .rd_valid(l2_valid), .rd_tag(l2_tag),
    .rd_weights(l2_w), .rd_bias(l2_b)
  );

  cascaded_adder #(.N(NU_L2), .W_W(Q_W), .SUM_W(SUM_W)) u_add2 (
    .in_spikes(hid_vec), .in_weights(l2_w), .sum(l2_sum)
  );

  lif_unit #(.N(NU_L3), .SUM_W(SUM_W), .REFRAC(REFRAC)) u_lif_out (
    .clk, .rst_n, .clear, .cfg(cfg_out), .in_valid(l2_valid), .in_idx(l2_tag),
    .in_sum(l2_sum), .in_bias(l2_b), .out_spike(out_spike), .out_u(out_u),
    .out_sat(out_sat), .out_blocked(out_blocked)
  );

  output_memory #(.N(NU_L3), .T_STEPS(T_STEPS)) u_out_mem (
    .clk, .rst_n, .clear, .shift_en(l2_valid), .spike_in(out_spike), .in_idx(l2_tag),
      .out_vec(out_step_spikes), .counts(spike_counts)
  );

  // ---------------- phase 3: classification ----------------
  class_comparator #(.N(NU_L3), .CW(CW)) u_cmp (
    .clk, .rst_n, .start(cls_start), .counts(spike_counts), .busy(cls_busy),
    .done(cls_done), .class_idx(class_out), .best_count(class_count)
  );

  assign hid_valid = l1_valid;
  assign hid_idx   = l1_tag;
  assign out_valid = l2_valid;
  assign out_idx   = l2_tag;

  // Weights may only be loaded while no inference runs.
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) wl_en |-> !busy);
  // The comparator only works during phase 3.
  a_cls_phase: assert property (@(posedge clk) disable iff (!rst_n) cls_busy |-> state == ST_PHASE3);

endmodule
