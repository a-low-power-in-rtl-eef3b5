// tb_cim_core: end-to-end test of the MAC core at a reduced size
// (16 rows, 4 neurons; inputs, weights and ADC at their full 8 bits).
//
// Weights are written through the M-CSD path, inputs applied, and every
// neuron's code is compared with floor(sum Xm*W / 256) saturated to 8 bits,
// where Xm is the value of the input's M-RD4 digits from the reference
// algorithm (equal to X for X < 128). Runs: the paper's example (125 x 123 on
// one row), MACs with small operands (in range), and MACs with large ones
// (saturating both ways). Checks the 51-cycle latency and that a start while
// busy is ignored. Counts the mechanisms of the design and fails if one was
// never exercised: both M-RD4 rewrites, zero digits (bypassed rows), +-1 and
// +-2 digits, M-CSD rewrites on the weight path, negative results, positive
// and negative ADC saturation, inputs >= 128 whose M-RD4 value differs from X.
module tb_cim_core;
  import cim_pkg::*;
  import tb_ref_pkg::*;

  localparam int ROWS = 16, NEURONS = 4, IN_BITS = 8, W_BITS = 8, AB = 8;
  localparam int M = 4;
  localparam int LAT = 1 + 10 * M + AB + 2;  // busy cycles + the result cycle

  logic clk = 1'b0, rst_n = 1'b0;
  logic w_we = 1'b0;
  logic [$clog2(ROWS)-1:0]    w_row = '0;
  logic [$clog2(NEURONS)-1:0] w_neuron = '0;
  logic signed [W_BITS:0]     w_value = '0;
  logic start = 1'b0;
  logic [IN_BITS-1:0] x_in [ROWS];
  logic busy, y_valid;
  logic signed [AB-1:0] y [NEURONS];
  phase_e phase;
  logic [$clog2(M+1)-1:0] digit_idx;

  int wmat [ROWS][NEURONS];
  int checks = 0, failures = 0;
  int n_f = 0, n_g = 0, n_zero = 0, n_one = 0, n_two = 0, n_mcsd = 0;
  int n_negout = 0, n_satp = 0, n_satn = 0, n_bigx = 0, n_ignored = 0;

  cim_core #(.ROWS(ROWS), .NEURONS(NEURONS)) dut (
    .clk(clk), .rst_n(rst_n), .w_we(w_we), .w_row(w_row), .w_neuron(w_neuron),
    .w_value(w_value), .start(start), .x_in(x_in), .busy(busy), .y_valid(y_valid),
    .y(y), .phase(phase), .digit_idx(digit_idx)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic write_w(input int r, input int n, input int w);
    @(negedge clk);
    w_we = 1'b1; w_row = r[$clog2(ROWS)-1:0]; w_neuron = n[$clog2(NEURONS)-1:0];
    w_value = (W_BITS+1)'(w);
    wmat[r][n] = w;
    if (mcsd_changes(w, W_BITS)) n_mcsd++;
    @(negedge clk);
    w_we = 1'b0;
  endtask

  task automatic mac(input int x [ROWS], input bit poke);
    int lat, xm, nf, ng;
    int z [];
    longint acc [NEURONS];
    foreach (acc[n]) acc[n] = 0;
    for (int r = 0; r < ROWS; r++) begin
      x_in[r] = IN_BITS'(x[r]);
      mrd4_ref(x[r], IN_BITS, z, nf, ng);
      n_f += nf; n_g += ng;
      foreach (z[j]) begin
        if (z[j] == 0) n_zero++;
        else if (z[j] == 1 || z[j] == -1) n_one++;
        else n_two++;
      end
      xm = digits_value(z);
      if (x[r] < 128) check(xm == x[r], $sformatf("M-RD4 value of %0d is %0d", x[r], xm));
      else if (xm != x[r]) n_bigx++;
      for (int n = 0; n < NEURONS; n++) acc[n] += longint'(xm) * wmat[r][n];
    end
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!y_valid && lat < 200) begin
      @(negedge clk);
      if (poke && lat == 20) begin
        start = 1'b1;   // ignored: the core is busy
        n_ignored++;
      end else start = 1'b0;
      lat++;
    end
    start = 1'b0;
    check(lat == LAT, $sformatf("latency %0d exp %0d", lat, LAT));
    for (int n = 0; n < NEURONS; n++) begin
      int e, raw;
      raw = floor_div(acc[n], 8);
      e = saturate(raw, AB);
      if (raw > 127) n_satp++;
      if (raw < -128) n_satn++;
      if (e < 0) n_negout++;
      check(int'(y[n]) == e, $sformatf("neuron %0d: y=%0d exp %0d (sum %0d)", n, y[n], e, acc[n]));
    end
    @(negedge clk);
    check(!busy && !y_valid, "idle after result");
  endtask

  initial begin
    int x [ROWS];
    foreach (x_in[r]) x_in[r] = '0;
    foreach (wmat[r, n]) wmat[r][n] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // the paper's example: input 125, weight 123 on one row
    write_w(0, 0, 123);
    write_w(0, 1, -119);
    foreach (x[r]) x[r] = 0;
    x[0] = 125;
    mac(x, 1'b0);
    check(int'(y[0]) == 60, "example 125*123 -> code 60");

    // small operands: stays inside the ADC range
    for (int it = 0; it < 8; it++) begin
      for (int r = 0; r < ROWS; r++)
        for (int n = 0; n < NEURONS; n++)
          write_w(r, n, int'($urandom_range(0, 120)) - 60);
      foreach (x[r]) x[r] = $urandom_range(0, 40);
      mac(x, it == 3);
    end
    // large operands: full ranges, saturation both ways, inputs >= 128
    for (int it = 0; it < 8; it++) begin
      for (int r = 0; r < ROWS; r++)
        for (int n = 0; n < NEURONS; n++)
          write_w(r, n, (n == 0) ? int'($urandom_range(0, 255))
                       : (n == 1) ? -int'($urandom_range(0, 255))
                       : int'($urandom_range(0, 510)) - 255);
      foreach (x[r]) x[r] = $urandom_range(0, 255);
      mac(x, 1'b0);
    end

    $display("mechanisms: F=%0d G=%0d zero=%0d pm1=%0d pm2=%0d mcsd=%0d neg=%0d satp=%0d satn=%0d bigx=%0d ignored=%0d",
             n_f, n_g, n_zero, n_one, n_two, n_mcsd, n_negout, n_satp, n_satn, n_bigx, n_ignored);
    check(n_f > 0, "M-RD4 0100 rewrite exercised");
    check(n_g > 0, "M-RD4 1011 rewrite exercised");
    check(n_zero > 0 && n_one > 0 && n_two > 0, "all digit kinds exercised");
    check(n_mcsd > 0, "M-CSD rewrite exercised");
    check(n_negout > 0, "negative result exercised");
    check(n_satp > 0 && n_satn > 0, "ADC saturation both ways");
    check(n_bigx > 0, "input >= 128 with top-digit sign weight seen");
    check(n_ignored > 0, "start while busy exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
