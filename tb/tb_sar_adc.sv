// tb_sar_adc: self-checking test of the SAR ADC model.
//
// Random and edge-case differential inputs (zero, exact code boundaries, far
// beyond both ends of the range) are converted; each code must equal
// floor((vp - vn) / 2^LSB_LOG2) saturated to 8-bit two's complement, and
// valid must rise exactly ADC_BITS cycles after the sampling edge.
module tb_sar_adc;

  localparam int AB = 8, VW = 30, L = 8;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic signed [VW-1:0] vp = '0, vn = '0;
  logic signed [AB-1:0] code;
  logic valid;
  int checks = 0, failures = 0;

  sar_adc #(.ADC_BITS(AB), .VW(VW), .LSB_LOG2(L)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .vp(vp), .vn(vn), .code(code), .valid(valid)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic convert(input int a, input int b);
    int d, e, lat;
    vp = VW'(a); vn = VW'(b);
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    lat = 0;
    while (!valid && lat < 50) begin @(negedge clk); lat++; end
    d = a - b;
    e = (d >= 0) ? d / (1 << L) : -((-d + (1 << L) - 1) / (1 << L));
    if (e > 127) e = 127;
    if (e < -128) e = -128;
    checks++;
    if (int'(code) != e || lat != AB) begin
      failures++;
      if (failures < 10) $display("FAIL vin=%0d code=%0d exp %0d latency %0d", d, code, e, lat);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    convert(0, 0);
    convert(15375, 0);               // paper example 125*123 -> 60
    convert(255, 0); convert(256, 0); convert(0, 1); convert(0, 256); convert(0, 257);
    convert(32767, 0); convert(32768, 0); convert(0, 32768); convert(0, 32769);
    convert(5000000, 0); convert(0, 5000000);
    for (int i = 0; i < 500; i++)
      convert($urandom_range(0, 40000), $urandom_range(0, 40000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
