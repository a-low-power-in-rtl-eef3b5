// cim_core: differential RRAM in-memory MAC core with M-RD4 inputs and M-CSD
// weights.
//
// The core computes, for every output neuron n, y[n] = sum_r X_r * W_r,n,
// scaled and quantised by the neuron's ADC. X_r are unsigned IN_BITS-bit
// inputs (after ReLU), W_r,n signed weights of up to W_BITS bits of magnitude.
//   * Weight write: w_value passes through the M-CSD encoder and the pair
//     (w_p, w_n) is stored in row w_row, the W_BITS columns of w_neuron.
//   * MAC: `start` latches x_in into the ROWS M-RD4 recoders. For each digit
//     (LSB first) the controller runs, twice (+-1 rows, then +-2 rows),
//     positive integration, negative integration and charge redistribution;
//     the word-line gating applies each row's digit to its b or c cells.
//     After M digits every neuron's SAR ADC converts vp - vn.
//   * Output: y_valid is high for one cycle with all NEURONS codes on y;
//     code = floor(sum X*W / 2^ADC_LSB_LOG2) saturated to ADC_BITS bits, two's
//     complement (with the default sizes, 2^8 model units per LSB; for
//     W_BITS + 2*M <= 8 one LSB is one unit, i.e. one unit product).
// Latency: busy is high for 1 + 10*M + ADC_BITS + 1 cycles after the clock
// edge that accepts `start` (50 cycles for 8-bit inputs) and y_valid is high
// in the cycle after that, 51 cycles after the accepting edge. A start while
// busy is ignored. Weight writes are meant for
// idle periods.
// Structure, block names and default sizes follow the paper: 256 rows, an
// 8-bit ADC per eight weight-bit columns, 8-bit inputs and weights. The paper
// quotes a 256 x 512 array; this design reads it as 256 rows by 256
// differential pair columns (512 RRAM cells per row), i.e. 32 neurons of
// 8-bit weights. The array, integrators and ADC are behavioural models.
// Lint reports rst_n as used both asynchronously and synchronously: the
// synchronous use is the `disable iff` of the controller's assertions.
module cim_core
  import cim_pkg::*;
#(
  parameter int ROWS         = 256,
  parameter int NEURONS      = 32,
  parameter int IN_BITS      = 8,
  parameter int W_BITS       = 8,
  parameter int ADC_BITS     = 8,
  parameter int ADC_LSB_LOG2 = (W_BITS + 2 * ((IN_BITS + 1) / 2) > 8)
                               ? W_BITS + 2 * ((IN_BITS + 1) / 2) - 8 : 0
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // weight programming
  input  logic                           w_we,
  input  logic [$clog2(ROWS)-1:0]        w_row,
  input  logic [$clog2(NEURONS)-1:0]     w_neuron,
  input  logic signed [W_BITS:0]         w_value,
  // MAC
  input  logic                           start,
  input  logic [IN_BITS-1:0]             x_in [ROWS],
  output logic                           busy,
  output logic                           y_valid,
  output logic signed [ADC_BITS-1:0]     y [NEURONS],
  // status: controller phase and current M-RD4 digit
  output phase_e                         phase,
  output logic [$clog2((IN_BITS+1)/2+1)-1:0] digit_idx
);

  localparam int M    = (IN_BITS + 1) / 2;
  localparam int CNTW = $clog2(2 * ROWS + 1);
  localparam int VW   = CNTW + W_BITS + 2 * M + 4;

  // ---------------------------------------------------------------- control
  sw_t    sw;
  logic   enc_load, enc_advance, adc_start;

  cim_controller #(.M_DIGITS(M), .ADC_BITS(ADC_BITS)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .sw(sw),
    .enc_load(enc_load), .enc_advance(enc_advance), .adc_start(adc_start),
    .busy(busy), .phase(phase), .digit_idx(digit_idx)
  );

  // ----------------------------------------------------------- M-RD4 input
  mrd4_t digit [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    mrd4_encoder #(.IN_BITS(IN_BITS)) u_enc (
      .clk(clk), .rst_n(rst_n), .load(enc_load), .advance(enc_advance),
      .x_in(x_in[r]), .digit(digit[r])
    );
  end

  logic [ROWS-1:0] wl_p, wl_n;

  wordline_gating #(.ROWS(ROWS)) u_wl (
    .digit(digit), .sw(sw), .wl_p(wl_p), .wl_n(wl_n)
  );

  // ---------------------------------------------------- M-CSD weight write
  logic [W_BITS-1:0] enc_wp, enc_wn;

  mcsd_encoder #(.W_BITS(W_BITS)) u_mcsd (
    .w(w_value), .w_p(enc_wp), .w_n(enc_wn)
  );

  // ------------------------------------------------------------ the array
  logic [CNTW-1:0] col_cnt [NEURONS*W_BITS];

  diff_rram_array #(.ROWS(ROWS), .NEURONS(NEURONS), .W_BITS(W_BITS)) u_array (
    .clk(clk), .rst_n(rst_n), .we(w_we), .w_row(w_row), .w_neuron(w_neuron),
    .w_p(enc_wp), .w_n(enc_wn), .wl_p(wl_p), .wl_n(wl_n), .col_cnt(col_cnt)
  );

  // ------------------------------------------- neurons: integrators + ADCs
  logic [NEURONS-1:0] adc_valid;

  for (genvar n = 0; n < NEURONS; n++) begin : g_neuron
    logic [CNTW-1:0]      cnt [W_BITS];
    logic signed [VW-1:0] vp, vn;

    for (genvar k = 0; k < W_BITS; k++) begin : g_col
      assign cnt[k] = col_cnt[n * W_BITS + k];
    end

    integral_multiplier #(.ROWS(ROWS), .W_BITS(W_BITS), .M_DIGITS(M), .VW(VW)) u_int (
      .clk(clk), .rst_n(rst_n), .sw(sw), .col_cnt(cnt),
      .vp(vp), .vn(vn)
    );

    sar_adc #(.ADC_BITS(ADC_BITS), .VW(VW), .LSB_LOG2(ADC_LSB_LOG2)) u_adc (
      .clk(clk), .rst_n(rst_n), .start(adc_start), .vp(vp), .vn(vn),
      .code(y[n]), .valid(adc_valid[n])
    );
  end

  // all ADCs start together; the result is valid when every one is done
  assign y_valid = &adc_valid;

endmodule
