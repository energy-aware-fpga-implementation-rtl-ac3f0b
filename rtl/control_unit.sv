// control_unit: sequencer of one inference of the two-layer SNN.
//
// After start the unit repeats, for each of T_STEPS time steps:
//   LOAD    accept IMG_SIZE pixels from the host (pix_valid/pix_ready), one
//           per cycle; each is rate-coded and written to the input memory at
//           the address in_wr_addr = pixel number.
//   PHASE1  read one row of the layer-1 weight memory per cycle for rows
//           0 .. NU_L2-1; one cycle later that row's hidden neuron is summed
//           and updated, so the phase lasts NU_L2 + 1 cycles.
//   PHASE2  the same for the NU_L3 output neurons using the layer-2 memory:
//           NU_L3 + 1 cycles.
// After the last step it pulses cls_start and waits in PHASE3 for the
// comparator (NU_L3 cycles), then shows DONE for one cycle and goes idle.
// At start it pulses clear (all potentials, refractory counters, spike
// buffers and counters to zero) and seed_load (rate-coder seed).
//
// The phases and their lengths of (Nu)L2 and (Nu)L3 cycles follow the
// paper; the extra read-latency cycle per phase, the LOAD handshake and the
// start/clear/done protocol are this design's choices.
module control_unit
  import snn_pkg::*;
#(
  parameter int unsigned IMG_SIZE = 4096,
  parameter int unsigned NU_L2    = 512,
  parameter int unsigned NU_L3    = 2,
  parameter int unsigned T_STEPS  = 25,
  localparam int unsigned AW      = (IMG_SIZE > 1) ? $clog2(IMG_SIZE) : 1,
  localparam int unsigned H_AW    = (NU_L2 > 1) ? $clog2(NU_L2) : 1,
  localparam int unsigned O_AW    = (NU_L3 > 1) ? $clog2(NU_L3) : 1,
  localparam int unsigned CNT_W   = $clog2(IMG_SIZE + NU_L2 + NU_L3 + 2),
  localparam int unsigned SW      = $clog2(T_STEPS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              pix_valid,
  output logic              pix_ready,
  output logic              clear,
  output logic              seed_load,
  output logic              in_wr_en,
  output logic [AW-1:0]     in_wr_addr,
  output logic              l1_rd_en,
  output logic [H_AW-1:0]   l1_rd_row,
  output logic              l2_rd_en,
  output logic [O_AW-1:0]   l2_rd_row,
  output logic              cls_start,
  input  logic              cls_done,
  output logic              busy,
  output logic              done,
  output logic [SW-1:0]     step,
  output ctrl_state_e       state
);

  logic [CNT_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      cnt   <= '0;
      step  <= '0;
    end else begin
      unique case (state)
        ST_IDLE: if (start) begin
          state <= ST_LOAD;
          cnt   <= '0;
          step  <= '0;
        end
        ST_LOAD: if (pix_valid) begin
          if (int'(cnt) == IMG_SIZE - 1) begin
            state <= ST_PHASE1;
            cnt   <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        ST_PHASE1: begin
          if (int'(cnt) == NU_L2) begin
            state <= ST_PHASE2;
            cnt   <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        ST_PHASE2: begin
          if (int'(cnt) == NU_L3) begin
            cnt <= '0;
            if (int'(step) == T_STEPS - 1) state <= ST_PHASE3;
            else                          state <= ST_LOAD;
            step <= step + 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        ST_PHASE3: if (cls_done) state <= ST_DONE;
        ST_DONE:   state <= ST_IDLE;
        default:   state <= ST_IDLE;
      endcase
    end
  end

  always_comb begin
    clear      = (state == ST_IDLE) && start;
    seed_load  = clear;
    pix_ready  = (state == ST_LOAD);
    in_wr_en   = (state == ST_LOAD) && pix_valid;
    in_wr_addr = AW'(cnt);
    l1_rd_en   = (state == ST_PHASE1) && (int'(cnt) < NU_L2);
    l1_rd_row  = H_AW'(cnt);
    l2_rd_en   = (state == ST_PHASE2) && (int'(cnt) < NU_L3);
    l2_rd_row  = O_AW'(cnt);
    cls_start  = (state == ST_PHASE2) && (int'(cnt) == NU_L3) && (int'(step) == T_STEPS - 1);
    busy       = (state != ST_IDLE);
    done       = (state == ST_DONE);
  end

  // A weight read is only issued inside its own phase.
  a_l1_phase: assert property (@(posedge clk) disable iff (!rst_n) l1_rd_en |-> state == ST_PHASE1);
  a_l2_phase: assert property (@(posedge clk) disable iff (!rst_n) l2_rd_en |-> state == ST_PHASE2);

endmodule
