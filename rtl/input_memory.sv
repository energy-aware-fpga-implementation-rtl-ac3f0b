// input_memory: one binary spike frame of the input image.
//
// IMG_SIZE one-bit cells. During frame load the rate encoder writes one cell
// per cycle at wr_addr; during the layer-1 phase all IMG_SIZE bits are
// presented at once on rd_frame, one bit per multiplexer of the cascaded
// adder. Writes take effect at the next clock edge; rd_frame is the register
// contents. Cells are cleared at reset.
//
// The size (1 x image size, one bit per pixel) follows the paper; building it
// from flip-flops so that the whole frame is readable in one cycle is this
// design's choice, made because each layer-1 neuron consumes every pixel in a
// single cycle.
module input_memory #(
  parameter int unsigned IMG_SIZE = 4096,
  localparam int unsigned AW      = (IMG_SIZE > 1) ? $clog2(IMG_SIZE) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic                wr_data,
  output logic [IMG_SIZE-1:0] rd_frame
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                rd_frame <= '0;
    else if (wr_en && int'(wr_addr) < IMG_SIZE) rd_frame[wr_addr] <= wr_data;
  end

endmodule
