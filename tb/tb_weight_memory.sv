// tb_weight_memory: self-checking test of a layer's weight and bias store.
//
// Loads every weight and bias of a 16 x 64 memory one value per cycle from
// a table kept here, then reads rows in random order, one read per cycle,
// and checks that each row, bias, tag and valid arrive exactly one cycle
// after the request.
module tb_weight_memory;
  localparam int NROWS = 16, NCOLS = 64, W_W = 16;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, wr_bias = 1'b0, rd_en = 1'b0, rd_valid;
  logic [3:0] wr_row = '0, rd_row = '0, rd_tag;
  logic [5:0] wr_col = '0;
  logic signed [W_W-1:0] wr_data = '0, rd_bias;
  logic [NCOLS-1:0][W_W-1:0] rd_weights;
  logic [W_W-1:0] w_ref [NROWS][NCOLS];
  logic [W_W-1:0] b_ref [NROWS];

  always #5 clk = ~clk;

  weight_memory #(.NROWS(NROWS), .NCOLS(NCOLS), .W_W(W_W)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 check(rd_valid == 1'b0, "valid after reset");
    rst_n = 1'b1;
    for (int r = 0; r < NROWS; r++) begin
      b_ref[r] = W_W'($urandom);
      for (int c = 0; c < NCOLS; c++) w_ref[r][c] = W_W'($urandom);
    end
    for (int r = 0; r < NROWS; r++) begin
      for (int c = 0; c < NCOLS; c++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_bias = 1'b0; wr_row = 4'(r); wr_col = 6'(c); wr_data = w_ref[r][c];
      end
      @(negedge clk);
      wr_bias = 1'b1; wr_col = 6'($urandom); wr_data = b_ref[r];
    end
    @(negedge clk) wr_en = 1'b0; wr_bias = 1'b0;
    // back-to-back reads
    for (int t = 0; t < 100; t++) begin
      automatic int r = $urandom_range(NROWS - 1);
      rd_en = ($urandom_range(3) != 0);
      rd_row = 4'(r);
      @(posedge clk);
      #1;
      check(rd_valid == rd_en, "valid not one cycle after request");
      if (rd_en) begin
        automatic bit ok = (rd_tag == 4'(r)) && (rd_bias == b_ref[r]);
        for (int c = 0; c < NCOLS; c++) ok &= (rd_weights[c] == w_ref[r][c]);
        check(ok, $sformatf("row %0d read-out differs", r));
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
