// tb_rate_encoder: self-checking test of the rate coder.
//
// A reference LFSR written here from the polynomial x^16+x^14+x^13+x^11+1
// predicts every spike; the test also checks the coding rule itself: a black
// pixel never spikes, a white one always does, and the spike rate of a pixel
// of value v over many draws is close to v/256. After seed_load the same
// pixel stream must give the same spikes again.
module tb_rate_encoder;
  localparam int PIX_W = 8;
  localparam logic [15:0] SEED = 16'hACE1;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic seed_load = 1'b0, in_valid = 1'b0, out_spike;
  logic [PIX_W-1:0] in_pixel = '0;
  logic [15:0] ref_lfsr;

  always #5 clk = ~clk;

  rate_encoder #(.PIX_W(PIX_W), .SEED(SEED)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  function automatic logic ref_spike(input logic [15:0] l, input logic [PIX_W-1:0] p);
    if (p == 8'hFF) return 1'b1;
    return int'(l[7:0]) < int'(p);
  endfunction

  function automatic logic [15:0] ref_next(input logic [15:0] l);
    return {l[14:0], l[15] ^ l[13] ^ l[12] ^ l[10]};
  endfunction

  // drive one pixel, compare with the reference, return the spike
  task automatic send(input logic [PIX_W-1:0] p, output logic s);
    in_valid = 1'b1;
    in_pixel = p;
    #1;
    s = out_spike;
    check(out_spike == ref_spike(ref_lfsr, p), $sformatf("pixel %0d lfsr %h", p, ref_lfsr));
    @(posedge clk);
    ref_lfsr = ref_next(ref_lfsr);
    #1;
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    logic s;
    logic first [64];
    ref_lfsr = SEED;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // black and white pixels
    ones = 0;
    for (int i = 0; i < 500; i++) begin send(8'd0, s); ones += int'(s); end
    check(ones == 0, "black pixel spiked");
    ones = 0;
    for (int i = 0; i < 500; i++) begin send(8'hFF, s); ones += int'(s); end
    check(ones == 500, "white pixel did not always spike");
    // rates of grey levels
    for (int v = 32; v < 256; v += 64) begin
      ones = 0;
      for (int i = 0; i < 4000; i++) begin send(PIX_W'(v), s); ones += int'(s); end
      check(ones > (v * 4000) / 256 - 200 && ones < (v * 4000) / 256 + 200,
            $sformatf("rate for %0d: %0d of 4000", v, ones));
    end
    // no spike without a valid pixel
    in_pixel = 8'hFF; in_valid = 1'b0; #1;
    check(out_spike == 1'b0, "spike without valid");
    // repeatability after seed_load
    @(negedge clk);
    seed_load = 1'b1; @(posedge clk); #1; seed_load = 1'b0;
    ref_lfsr = SEED;
    for (int i = 0; i < 64; i++) begin send(8'd100, s); first[i] = s; end
    seed_load = 1'b1; @(posedge clk); #1; seed_load = 1'b0;
    ref_lfsr = SEED;
    for (int i = 0; i < 64; i++) begin send(8'd100, s); check(s == first[i], "seed reload differs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
