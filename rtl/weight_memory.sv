// weight_memory: the Q1.15 weights and bias of one fully connected layer.
//
// NROWS rows, one per neuron of the layer; each row holds the NCOLS weights
// of that neuron's inputs (16-bit signed Q1.15) plus the neuron's bias.
// The host writes one weight (wr_bias = 0, at wr_row/wr_col) or one bias
// (wr_bias = 1, at wr_row) per cycle. A read (rd_en, rd_row) returns the whole
// row of weights and the bias one cycle later on rd_weights/rd_bias, with
// rd_valid and rd_tag (the row number) delayed alongside, so the cascaded
// adder can consume one neuron per cycle. A write and a read of the same row
// in one cycle return the old contents.
//
// The layer sizes ((Img)size x 16-bit x (Nu)L2 for layer 1 and
// (Nu)L2 x 16-bit x (Nu)L3 for layer 2) and the 16-bit Q1.15 format follow the
// paper. A row-wide read port, the one-weight-per-cycle write port and
// keeping the biases next to the weights are choices of this design. The
// weight array is not reset (it is RAM); it must be loaded before use.
module weight_memory #(
  parameter int unsigned NROWS = 512,
  parameter int unsigned NCOLS = 4096,
  parameter int unsigned W_W   = 16,
  localparam int unsigned RAW  = (NROWS > 1) ? $clog2(NROWS) : 1,
  localparam int unsigned CAW  = (NCOLS > 1) ? $clog2(NCOLS) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host write port
  input  logic                        wr_en,
  input  logic                        wr_bias,
  input  logic [RAW-1:0]              wr_row,
  input  logic [CAW-1:0]              wr_col,
  input  logic signed [W_W-1:0]       wr_data,
  // row read port
  input  logic                        rd_en,
  input  logic [RAW-1:0]              rd_row,
  output logic                        rd_valid,
  output logic [RAW-1:0]              rd_tag,
  output logic [NCOLS-1:0][W_W-1:0]   rd_weights,
  output logic signed [W_W-1:0]       rd_bias
);

  logic [NCOLS-1:0][W_W-1:0] mem  [NROWS];
  logic signed [W_W-1:0]     bias [NROWS];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_row) < NROWS) begin
      if (wr_bias)                  bias[wr_row]        <= wr_data;
      else if (int'(wr_col) < NCOLS) mem[wr_row][wr_col] <= wr_data;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en && int'(rd_row) < NROWS) begin
      rd_weights <= mem[rd_row];
      rd_bias    <= bias[rd_row];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_tag   <= '0;
    end else begin
      rd_valid <= rd_en;
      rd_tag   <= rd_row;
    end
  end

endmodule
