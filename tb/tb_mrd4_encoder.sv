// tb_mrd4_encoder: self-checking test of the serial M-RD4 recoder.
//
// For every 8-bit input the recoder is loaded and stepped through its four
// digits. Each digit is compared with a reference that runs the M-RD4
// algorithm literally (extend, append a 0, rewrite 0100 -> 0011 and
// 1011 -> 1100 in place, then z = -2 t2 + t1 + t0). The test also checks that
// exactly one output line is high for a non-zero digit, that the digit value
// reproduces X for all X < 128, and the two worked examples of the paper:
// 01010010 -> 1 1 0 2 and 01111101 -> 2 0 -1 1 (MSB first).
module tb_mrd4_encoder;
  import cim_pkg::*;

  localparam int N = 8;
  localparam int M = 4;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  logic         load = 1'b0, advance = 1'b0;
  logic [N-1:0] x_in = '0;
  mrd4_t        digit;

  int checks = 0, failures = 0;

  mrd4_encoder #(.IN_BITS(N)) dut (
    .clk(clk), .rst_n(rst_n), .load(load), .advance(advance), .x_in(x_in),
    .digit(digit)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Literal Algorithm 1 on an array T.
  function automatic void ref_mrd4(input int x, output int z[M]);
    int t[N+4];
    int i, j;
    for (int k = 0; k < N + 4; k++) t[k] = 0;
    for (int k = 0; k < N; k++) t[k+1] = (x >> k) & 1;
    i = 0; j = 0;
    while (i <= N - 2) begin
      if (t[i+3] == 0 && t[i+2] == 1 && t[i+1] == 0 && t[i] == 0) begin
        t[i+3] = 0; t[i+2] = 0; t[i+1] = 1; t[i] = 1;
      end else if (t[i+3] == 1 && t[i+2] == 0 && t[i+1] == 1 && t[i] == 1) begin
        t[i+3] = 1; t[i+2] = 1; t[i+1] = 0; t[i] = 0;
      end
      z[j] = -2 * t[i+2] + t[i+1] + t[i];
      i += 2; j++;
    end
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic run_one(input int x, output int got[M]);
    @(negedge clk);
    x_in = N'(x); load = 1'b1;
    @(negedge clk);
    load = 1'b0;
    for (int j = 0; j < M; j++) begin
      got[j] = mrd4_value(digit);
      check($countones({digit.z2, digit.zm2, digit.z1, digit.zm1}) <= 1,
            $sformatf("x=%0d step %0d not one-hot", x, j));
      advance = 1'b1;
      @(negedge clk);
      advance = 1'b0;
    end
  endtask

  initial begin
    int got[M], exp_z[M];
    int val;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int x = 0; x < 256; x++) begin
      run_one(x, got);
      ref_mrd4(x, exp_z);
      val = 0;
      for (int j = 0; j < M; j++) begin
        check(got[j] == exp_z[j],
              $sformatf("x=%0d digit %0d got %0d exp %0d", x, j, got[j], exp_z[j]));
        val += got[j] * (4 ** j);
      end
      if (x < 128) check(val == x, $sformatf("x=%0d value %0d", x, val));
      if (x == 82)
        check(got[3] == 1 && got[2] == 1 && got[1] == 0 && got[0] == 2, "example 01010010 -> 1102");
      if (x == 125)
        check(got[3] == 2 && got[2] == 0 && got[1] == -1 && got[0] == 1, "example 01111101 -> 2 0 -1 1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
