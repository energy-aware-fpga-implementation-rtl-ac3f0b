// snn_pkg: sizes, number formats and types shared by the 4096-512-2 spiking
// network accelerator.
//
// The network sizes (64x64 = 4096 binary inputs, 512 hidden LIF neurons,
// 2 output LIF neurons, 25 time steps, a 5-step refractory period), the
// 16-bit signed Q1.15 number format of weights, biases and membrane
// potentials, and the 28-bit width of the adder-tree result follow the
// paper. The pixel width, the state encoding of the controller and the
// width of the spike counters are choices of this design.
package snn_pkg;

  // Q1.15 fixed point: 1 sign bit, 15 fraction bits, range [-1, 1).
  localparam int unsigned Q_W    = 16;
  localparam int unsigned Q_FRAC = 15;
  localparam logic signed [Q_W-1:0] Q_MAX = 16'sh7FFF;
  localparam logic signed [Q_W-1:0] Q_MIN = 16'sh8000;

  // Network sizes of the main configuration.
  localparam int unsigned IMG_SIZE_D = 4096;  // 64 x 64 binary input pixels
  localparam int unsigned NU_L2_D    = 512;   // hidden LIF neurons
  localparam int unsigned NU_L3_D    = 2;     // output LIF neurons
  localparam int unsigned T_STEPS_D  = 25;    // time steps per inference
  localparam int unsigned REFRAC_D   = 5;     // refractory period in time steps
  localparam int unsigned SUM_W_D    = 28;    // width of the cascaded-adder result
  localparam int unsigned PIX_W_D    = 8;     // grey-level pixel width (own choice)

  // Output classes; neuron 0 is "collision", neuron 1 "no collision".
  typedef enum logic {
    CLS_COLLISION    = 1'b0,
    CLS_NO_COLLISION = 1'b1
  } snn_class_e;

  // Controller states.
  typedef enum logic [2:0] {
    ST_IDLE   = 3'd0,  // waiting for start
    ST_LOAD   = 3'd1,  // receiving and rate-coding one input frame
    ST_PHASE1 = 3'd2,  // hidden layer, one neuron per cycle
    ST_PHASE2 = 3'd3,  // output layer, one neuron per cycle
    ST_PHASE3 = 3'd4,  // classification, one output neuron per cycle
    ST_DONE   = 3'd5   // result valid for one cycle
  } ctrl_state_e;

  // Runtime parameters of one LIF layer (trained values, loaded by the host).
  typedef struct packed {
    logic signed [Q_W-1:0] threshold;   // firing threshold, Q1.15
    logic signed [Q_W-1:0] u_rest;      // resting potential subtracted every step, Q1.15
    logic        [3:0]     beta_shift;  // leak: beta*U is computed as U >>> beta_shift
    logic                  refrac_en;   // enable the refractory period
  } lif_cfg_t;

  // Saturate a wide signed value to Q1.15.
  function automatic logic signed [Q_W-1:0] sat_q15(input logic signed [47:0] v);
    if (v > 48'sd32767)       return Q_MAX;
    else if (v < -48'sd32768) return Q_MIN;
    else                      return v[Q_W-1:0];
  endfunction

endpackage
