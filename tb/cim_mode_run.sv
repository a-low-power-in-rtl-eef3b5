// cim_mode_run: testbench helper that runs one precision pattern of the MAC
// core (IN_BITS-bit inputs, W_BITS-bit weights) end to end.
//
// It instantiates cim_core at ROWS x NEURONS with the given widths and the
// core's own default ADC scaling, writes random weights over the whole signed
// range +-(2^W_BITS - 1), applies random inputs over the whole unsigned range
// and runs RUNS MACs. Each neuron's code is compared with
// floor(sum Xm*W / 2^L) saturated to 8 bits, where Xm is the value of the
// input's M-RD4 digits (equal to X except for some even-width inputs with the
// MSB set) and L = max(0, W_BITS + 2*ceil(IN_BITS/2) - 8). The latency
// 1 + 10*M + 8 + 2 cycles (M = ceil(IN_BITS/2) digits) is checked for every
// MAC. `done` rises when all runs are over; `checks` and `failures` are then
// final. Used by tb_cim_core_modes, one instance per pattern.
module cim_mode_run
  import cim_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int IN_BITS = 8,
  parameter int W_BITS  = 8,
  parameter int ROWS    = 32,
  parameter int NEURONS = 4,
  parameter int RUNS    = 6
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int AB  = 8;
  localparam int M   = (IN_BITS + 1) / 2;
  localparam int L   = (W_BITS + 2 * M > 8) ? W_BITS + 2 * M - 8 : 0;
  localparam int LAT = 1 + 10 * M + AB + 2;

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

  cim_core #(.ROWS(ROWS), .NEURONS(NEURONS), .IN_BITS(IN_BITS), .W_BITS(W_BITS)) dut (
    .clk(clk), .rst_n(rst_n), .w_we(w_we), .w_row(w_row), .w_neuron(w_neuron),
    .w_value(w_value), .start(start), .x_in(x_in), .busy(busy), .y_valid(y_valid),
    .y(y), .phase(phase), .digit_idx(digit_idx)
  );

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL (%0d-bit input, %0d-bit weight): %s", IN_BITS, W_BITS, what);
    end
  endtask

  initial begin
    int z [];
    int nf, ng, lat, e;
    longint acc [NEURONS];
    int wmax;
    done = 1'b0; checks = 0; failures = 0;
    wmax = (1 << W_BITS) - 1;
    foreach (x_in[r]) x_in[r] = '0;
    @(posedge rst_n);
    for (int run = 0; run < RUNS; run++) begin
      for (int r = 0; r < ROWS; r++)
        for (int n = 0; n < NEURONS; n++) begin
          @(negedge clk);
          wmat[r][n] = int'($urandom_range(0, 2 * wmax)) - wmax;
          w_we = 1'b1; w_row = r[$clog2(ROWS)-1:0]; w_neuron = n[$clog2(NEURONS)-1:0];
          w_value = (W_BITS+1)'(wmat[r][n]);
        end
      @(negedge clk);
      w_we = 1'b0;
      foreach (acc[n]) acc[n] = 0;
      for (int r = 0; r < ROWS; r++) begin
        // the first run uses sparse inputs so that some results stay in range
        x_in[r] = IN_BITS'((run == 0 && r % 4 != 0) ? 0 : $urandom_range(0, (1 << IN_BITS) - 1));
        mrd4_ref(int'(x_in[r]), IN_BITS, z, nf, ng);
        for (int n = 0; n < NEURONS; n++) acc[n] += longint'(digits_value(z)) * wmat[r][n];
      end
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      lat = 1;
      while (!y_valid && lat < 400) begin
        @(negedge clk);
        lat++;
      end
      check(lat == LAT, $sformatf("latency %0d exp %0d", lat, LAT));
      for (int n = 0; n < NEURONS; n++) begin
        e = saturate(floor_div(acc[n], L), AB);
        check(int'(y[n]) == e, $sformatf("run %0d neuron %0d: y=%0d exp %0d (sum %0d)",
                                         run, n, y[n], e, acc[n]));
      end
    end
    done = 1'b1;
  end

endmodule
