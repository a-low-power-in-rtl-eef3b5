// tb_cim_core_full: the core at its default size (256 rows, 32 neurons,
// 8-bit inputs, weights and ADC), no parameter overrides.
//
// All 8192 weights are written through the M-CSD path, then three MACs run:
// the paper's example (input 125 on row 0, weight 123 -> code 60 on neuron 0),
// a sparse input vector that keeps every neuron inside the ADC range, and a
// dense random vector that drives many neurons into saturation. Every
// neuron's code is compared with floor(sum Xm*W / 256) saturated to 8 bits
// (Xm: value of the reference M-RD4 digits), and the 51-cycle latency is
// checked.
module tb_cim_core_full;
  import cim_pkg::*;
  import tb_ref_pkg::*;

  localparam int ROWS = 256, NEURONS = 32, IN_BITS = 8, W_BITS = 8, AB = 8, M = 4;
  localparam int LAT = 1 + 10 * M + AB + 2;

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

  cim_core dut (
    .clk(clk), .rst_n(rst_n), .w_we(w_we), .w_row(w_row), .w_neuron(w_neuron),
    .w_value(w_value), .start(start), .x_in(x_in), .busy(busy), .y_valid(y_valid),
    .y(y), .phase(phase), .digit_idx(digit_idx)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
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
    w_we = 1'b1; w_row = r[$clog2(ROWS)-1:0]; w_neuron = n[$clog2(NEURONS)-1:0];
    w_value = (W_BITS+1)'(w);
    wmat[r][n] = w;
    @(negedge clk);
  endtask

  task automatic mac(input int x [ROWS], output int n_sat);
    int lat, nf, ng;
    int z [];
    longint acc [NEURONS];
    foreach (acc[n]) acc[n] = 0;
    n_sat = 0;
    for (int r = 0; r < ROWS; r++) begin
      x_in[r] = IN_BITS'(x[r]);
      mrd4_ref(x[r], IN_BITS, z, nf, ng);
      for (int n = 0; n < NEURONS; n++) acc[n] += longint'(digits_value(z)) * wmat[r][n];
    end
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!y_valid && lat < 200) begin @(negedge clk); lat++; end
    check(lat == LAT, $sformatf("latency %0d exp %0d", lat, LAT));
    for (int n = 0; n < NEURONS; n++) begin
      int raw = floor_div(acc[n], 8);
      if (raw > 127 || raw < -128) n_sat++;
      check(int'(y[n]) == saturate(raw, AB),
            $sformatf("neuron %0d: y=%0d exp %0d", n, y[n], saturate(raw, AB)));
    end
  endtask

  initial begin
    int x [ROWS];
    int n_sat;
    foreach (x_in[r]) x_in[r] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int r = 0; r < ROWS; r++)
      for (int n = 0; n < NEURONS; n++)
        write_w(r, n, (r == 0 && n == 0) ? 123 : int'($urandom_range(0, 510)) - 255);
    w_we = 1'b0;

    foreach (x[r]) x[r] = 0;
    x[0] = 125;
    mac(x, n_sat);
    check(int'(y[0]) == 60, "example 125*123 -> code 60");

    foreach (x[r]) x[r] = ($urandom_range(0, 31) == 0) ? $urandom_range(0, 63) : 0;
    mac(x, n_sat);
    check(n_sat == 0, "sparse vector stays in range");

    foreach (x[r]) x[r] = $urandom_range(0, 127);
    mac(x, n_sat);
    $display("dense vector: %0d of %0d neurons saturated", n_sat, NEURONS);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
