// tb_input_memory: self-checking test of the one-bit-per-pixel frame buffer.
//
// Writes a random frame bit by bit and checks the parallel read-out against a
// copy kept here, then overwrites single bits and checks that only they
// change; out-of-range addresses (at a non-power-of-two size) must be ignored.
module tb_input_memory;
  localparam int IMG_SIZE = 4096;
  localparam int AW = $clog2(IMG_SIZE);

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, wr_data = 1'b0;
  logic [AW-1:0] wr_addr = '0;
  logic [IMG_SIZE-1:0] rd_frame, expect_frame;

  // a second, non-power-of-two instance for the address range check
  logic [9:0]  s_addr = '0;
  logic        s_en = 1'b0, s_data = 1'b0;
  logic [999:0] s_frame;

  always #5 clk = ~clk;

  input_memory #(.IMG_SIZE(IMG_SIZE)) dut (.*);
  input_memory #(.IMG_SIZE(1000)) dut_small (.clk, .rst_n, .wr_en(s_en), .wr_addr(s_addr),
                                             .wr_data(s_data), .rd_frame(s_frame));

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
    #1 check(rd_frame == '0, "not cleared by reset");
    rst_n = 1'b1;
    for (int i = 0; i < IMG_SIZE; i++) expect_frame[i] = 1'($urandom);
    for (int i = 0; i < IMG_SIZE; i++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = AW'(i); wr_data = expect_frame[i];
    end
    @(negedge clk) wr_en = 1'b0;
    check(rd_frame == expect_frame, "frame read-out differs");
    for (int t = 0; t < 200; t++) begin
      automatic int k = $urandom_range(IMG_SIZE - 1);
      @(negedge clk);
      wr_en = 1'b1; wr_addr = AW'(k); wr_data = ~expect_frame[k];
      expect_frame[k] = ~expect_frame[k];
      @(negedge clk) wr_en = 1'b0;
      check(rd_frame == expect_frame, $sformatf("single write %0d", k));
    end
    // hold without write enable
    @(negedge clk) wr_data = ~wr_data;
    repeat (3) @(negedge clk);
    check(rd_frame == expect_frame, "changed without write enable");
    // small instance: write all ones, then an out-of-range address
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk); s_en = 1'b1; s_addr = 10'(i); s_data = 1'b1;
    end
    @(negedge clk); s_addr = 10'd1010; s_data = 1'b0;
    @(negedge clk) s_en = 1'b0;
    check(s_frame == '1, "small instance");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
