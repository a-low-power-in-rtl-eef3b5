// sar_adc: behavioural model of the differential charge-redistribution SAR
// ADC shared by the integrators of one output neuron.
//
// This is a behavioural model of a mixed-signal part: the comparator and the
// capacitor DAC are ideal. The input is the differential voltage
// vin = vp - vn in the integral multiplier's integer units; one ADC LSB is
// 2^LSB_LOG2 of those units. The conversion is a binary search in offset
// binary, MSB first, one decision per clock cycle, and the result is the
// two's-complement code floor(vin / 2^LSB_LOG2) saturated to
// [-2^(ADC_BITS-1), 2^(ADC_BITS-1)-1].
// With 8-bit inputs and weights the integer vin equals sum X*W, and the
// paper's example (one cell gives about 255 mV, the 8-bit result of
// 59.73 mV is 59) puts one LSB near 1 mV, i.e. about 2^8 units; LSB_LOG2
// defaults to exactly 8.
// Timing: vp and vn are sampled on the clock edge at which `start` is high;
// the next ADC_BITS edges decide one bit each; `valid` is high for one cycle
// after the last decision and `code` holds the result until the next start.
// Only the resolution (8 bits) and the differential SAR type are the paper's;
// the code format, the LSB size and the timing are this design's choices.
module sar_adc #(
  parameter int ADC_BITS = 8,
  parameter int VW       = 30,
  parameter int LSB_LOG2 = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic signed [VW-1:0]       vp,
  input  logic signed [VW-1:0]       vn,
  output logic signed [ADC_BITS-1:0] code,
  output logic                       valid
);

  localparam int BW = $clog2(ADC_BITS + 1);
  localparam int XW = VW + 2;

  logic signed [XW-1:0]  vin_q;
  logic [ADC_BITS-1:0]   sar_q;   // offset-binary result register
  logic [BW-1:0]         bit_q;   // bits still to decide
  logic                  busy_q;

  // Comparator against the DAC level of the trial code.
  logic [ADC_BITS-1:0]   trial;
  logic signed [XW-1:0]  level;
  logic                  keep;
  always_comb begin
    trial = sar_q | (ADC_BITS'(1) << (bit_q - 1'b1));
    level = (XW'(signed'({1'b0, trial})) - XW'(2 ** (ADC_BITS - 1))) <<< LSB_LOG2;
    keep  = (vin_q >= level);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vin_q  <= '0;
      sar_q  <= '0;
      bit_q  <= '0;
      busy_q <= 1'b0;
      valid  <= 1'b0;
      code   <= '0;
    end else begin
      valid <= 1'b0;
      if (start) begin
        vin_q  <= XW'(vp) - XW'(vn);
        sar_q  <= '0;
        bit_q  <= BW'(ADC_BITS);
        busy_q <= 1'b1;
      end else if (busy_q) begin
        if (keep) sar_q <= trial;
        bit_q <= bit_q - 1'b1;
        if (bit_q == BW'(1)) begin
          busy_q <= 1'b0;
          valid  <= 1'b1;
          code   <= signed'((keep ? trial : sar_q) ^ (ADC_BITS'(1) << (ADC_BITS - 1)));
        end
      end
    end
  end

endmodule
