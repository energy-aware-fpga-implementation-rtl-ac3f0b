// class_comparator: picks the output neuron that spiked most.
//
// A start pulse begins a sequential maximum search over the N spike counts:
// in busy cycle k (k = 0 .. N-1) count k is compared with the best so far
// and replaces it if strictly greater (count 0 is taken in cycle 0). So the
// search takes N cycles, and a tie goes to the lower neuron index. The
// result (class_idx, best_count) is registered and done pulses for one cycle
// after the last comparison. With the two output neurons of the collision
// network, index 0 means "collision" and 1 "no collision".
//
// The comparator after the output memory and its N-cycle phase follow the
// paper. Comparing spike counts, the tie rule and the class numbering are
// this design's choices.
module class_comparator #(
  parameter int unsigned N  = 2,
  parameter int unsigned CW = 5,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [N-1:0][CW-1:0] counts,
  output logic                 busy,
  output logic                 done,
  output logic [IW-1:0]        class_idx,
  output logic [CW-1:0]        best_count
);

  logic [IW-1:0] k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      k          <= '0;
      class_idx  <= '0;
      best_count <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        k    <= '0;
      end else if (busy) begin
        if (k == '0 || counts[k] > best_count) begin
          best_count <= counts[k];
          class_idx  <= k;
        end
        if (int'(k) == N - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end

endmodule
