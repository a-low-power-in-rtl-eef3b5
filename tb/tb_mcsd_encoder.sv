// tb_mcsd_encoder: self-checking test of the M-CSD weight encoder.
//
// Every weight from -255 to 255 is applied. The outputs are compared with a
// reference that runs the M-CSD algorithm with while loops on an integer
// digit array; the test also checks w_p - w_n == w, that no position is set
// in both halves, that the number of non-zero digits never exceeds the
// binary count, and the paper's two examples (-119 and 123).
module tb_mcsd_encoder;

  localparam int W = 8;

  logic signed [W:0] w;
  logic [W-1:0]      w_p, w_n;

  int checks = 0, failures = 0;
  int n_run = 0;

  mcsd_encoder #(.W_BITS(W)) dut (.w(w), .w_p(w_p), .w_n(w_n));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void ref_mcsd(input int val, output int rp, output int rn);
    int d[W+6];
    int i, j, k, flag, s, mag;
    s = (val < 0) ? -1 : 1;
    mag = (val < 0) ? -val : val;
    foreach (d[p]) d[p] = 0;
    for (int p = 0; p < W; p++) if ((mag >> p) & 1) d[p] = s;
    flag = 0; i = W - 1;
    while (i > 0 && flag == 0) begin
      if (d[i] == 0) flag = 1;
      i--;
    end
    j = 0;
    while (j < i) begin
      if (d[j+4] == 1 && d[j+3] == 1 && d[j+2] == 0 && d[j+1] == 1 && d[j] == 1) begin
        d[j+2] = 1; d[j+1] = 0; d[j] = -1; j += 2;
      end else if (d[j+4] == -1 && d[j+3] == -1 && d[j+2] == 0 && d[j+1] == -1 && d[j] == -1) begin
        d[j+2] = -1; d[j+1] = 0; d[j] = 1; j += 2;
      end else if (d[j+2] == 1 && d[j+1] == 1 && d[j] == 1) begin
        k = j + 2;
        while (d[k] == 1) k++;
        d[k] = 1;
        for (int p = j + 1; p < k; p++) d[p] = 0;
        d[j] = -1; j = k;
      end else if (d[j+2] == -1 && d[j+1] == -1 && d[j] == -1) begin
        k = j + 2;
        while (d[k] == -1) k++;
        d[k] = -1;
        for (int p = j + 1; p < k; p++) d[p] = 0;
        d[j] = 1; j = k;
      end else begin
        j++;
      end
    end
    rp = 0; rn = 0;
    for (int p = 0; p < W + 6; p++) begin
      if (d[p] == 1)  rp |= (1 << p);
      if (d[p] == -1) rn |= (1 << p);
    end
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int rp, rn;
    for (int v = -255; v <= 255; v++) begin
      w = (W+1)'(v);
      #1;
      ref_mcsd(v, rp, rn);
      check(int'(w_p) == rp && int'(w_n) == rn,
            $sformatf("w=%0d got p=%b n=%b exp p=%b n=%b", v, w_p, w_n, rp[W-1:0], rn[W-1:0]));
      check(int'(w_p) - int'(w_n) == v, $sformatf("w=%0d value %0d", v, int'(w_p) - int'(w_n)));
      check((w_p & w_n) == '0, $sformatf("w=%0d overlapping digits", v));
      check($countones(w_p) + $countones(w_n) <= $countones(v < 0 ? -v : v),
            $sformatf("w=%0d more non-zero digits than binary", v));
      // the reference changed the plain differential split: a rewrite happened
      if (v >= 0 ? (rp != v) : (rn != -v)) n_run++;
    end
    w = -9'sd119; #1;
    check(w_p == 8'b0000_1001 && w_n == 8'b1000_0000, "example -119");
    w = 9'sd123; #1;
    check(w_p == 8'b1000_0000 && w_n == 8'b0000_0101, "example 123");
    check(n_run > 0, "rewrites exercised");
    $display("weights changed by the M-CSD rewrite: %0d", n_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
