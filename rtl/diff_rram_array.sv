// diff_rram_array: behavioural model of the differential 1R1T RRAM array.
//
// This is a behavioural model of an analog, process-specific part. Every
// crossing of row r and column c holds a 1R1T pair: the b cell stores bit c
// of the positive weight w_p, the c cell the same bit of the negative weight
// w_n. A cell in the low resistance state (stored 1) whose word line is high
// sinks one unit of current from its column for the whole integration phase;
// a cell in the high resistance state is taken as open (the paper's cells
// are about 10 MOhm against 10 GOhm, so HRS leakage is 1000x smaller and is
// neglected here). The model reports, per column, the number of conducting
// cells: col_cnt[c] = sum_r (wl_p[r] & b[r][c]) + (wl_n[r] & c[r][c]).
// The regulator that holds the drain voltage constant (taken from earlier
// work) is what makes this count proportional to the integrated charge; it
// has no logic function and is not modelled separately.
//
// Columns are grouped by weight: column n*W_BITS + k holds bit k of the
// weight of output neuron n. Weights are written one (row, neuron) at a time
// through the write port (we, w_row, w_neuron, w_p, w_n) on a rising clock
// edge; programming pulses and verify loops of a real RRAM write are not
// modelled. All cells start in HRS (0) after reset. col_cnt is combinational.
module diff_rram_array #(
  parameter int ROWS    = 256,
  parameter int NEURONS = 32,
  parameter int W_BITS  = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        we,
  input  logic [$clog2(ROWS)-1:0]     w_row,
  input  logic [$clog2(NEURONS)-1:0]  w_neuron,
  input  logic [W_BITS-1:0]           w_p,
  input  logic [W_BITS-1:0]           w_n,
  input  logic [ROWS-1:0]             wl_p,
  input  logic [ROWS-1:0]             wl_n,
  output logic [$clog2(2*ROWS+1)-1:0] col_cnt [NEURONS*W_BITS]
);

  localparam int COLS = NEURONS * W_BITS;
  localparam int CNTW = $clog2(2 * ROWS + 1);

  logic [COLS-1:0] b_mem [ROWS];
  logic [COLS-1:0] c_mem [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) begin
        b_mem[r] <= '0;
        c_mem[r] <= '0;
      end
    end else if (we) begin
      for (int k = 0; k < W_BITS; k++) begin
        b_mem[w_row][int'(w_neuron) * W_BITS + k] <= w_p[k];
        c_mem[w_row][int'(w_neuron) * W_BITS + k] <= w_n[k];
      end
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      col_cnt[c] = '0;
      for (int r = 0; r < ROWS; r++)
        col_cnt[c] = col_cnt[c] + CNTW'(wl_p[r] & b_mem[r][c]) + CNTW'(wl_n[r] & c_mem[r][c]);
    end
  end

endmodule
