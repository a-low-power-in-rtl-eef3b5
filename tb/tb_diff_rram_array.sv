// tb_diff_rram_array: self-checking test of the differential array model.
//
// Writes random (w_p, w_n) pairs into a small array, keeps its own copy of
// the cell states, and for random word-line patterns compares every column's
// conducting-cell count with the count worked out from that copy.
module tb_diff_rram_array;

  localparam int ROWS = 16, NEURONS = 4, W = 8;
  localparam int COLS = NEURONS * W;
  localparam int CNTW = $clog2(2 * ROWS + 1);

  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [$clog2(ROWS)-1:0]    w_row = '0;
  logic [$clog2(NEURONS)-1:0] w_neuron = '0;
  logic [W-1:0]    w_p = '0, w_n = '0;
  logic [ROWS-1:0] wl_p = '0, wl_n = '0;
  logic [CNTW-1:0] col_cnt [COLS];
  bit   b_ref [ROWS][COLS];
  bit   c_ref [ROWS][COLS];
  int checks = 0, failures = 0;

  diff_rram_array #(.ROWS(ROWS), .NEURONS(NEURONS), .W_BITS(W)) dut (
    .clk(clk), .rst_n(rst_n), .we(we), .w_row(w_row), .w_neuron(w_neuron),
    .w_p(w_p), .w_n(w_n), .wl_p(wl_p), .wl_n(wl_n), .col_cnt(col_cnt)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input string when);
    for (int c = 0; c < COLS; c++) begin
      int e = 0;
      for (int r = 0; r < ROWS; r++)
        e += (wl_p[r] && b_ref[r][c]) + (wl_n[r] && c_ref[r][c]);
      checks++;
      if (int'(col_cnt[c]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL %s col %0d: %0d exp %0d", when, c, col_cnt[c], e);
      end
    end
  endtask

  initial begin
    foreach (b_ref[r, c]) begin b_ref[r][c] = 0; c_ref[r][c] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    wl_p = '1; wl_n = '1;
    #1 compare("after reset");
    for (int iter = 0; iter < 300; iter++) begin
      @(negedge clk);
      we = 1'b1;
      w_row = $urandom_range(0, ROWS - 1);
      w_neuron = $urandom_range(0, NEURONS - 1);
      w_p = $urandom; w_n = $urandom;
      @(negedge clk);
      we = 1'b0;
      for (int k = 0; k < W; k++) begin
        b_ref[w_row][int'(w_neuron) * W + k] = w_p[k];
        c_ref[w_row][int'(w_neuron) * W + k] = w_n[k];
      end
      wl_p = ROWS'($urandom); wl_n = ROWS'($urandom);
      #1 compare("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
