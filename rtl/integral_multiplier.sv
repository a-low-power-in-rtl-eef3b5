// integral_multiplier: behavioural model of one output neuron's differential
// passive integrator with charge-redistribution weighting.
//
// This is a behavioural model of an analog circuit. All voltages are kept as
// exact integers: the deviation below Vdd, in units of U / 2^(W_BITS+2*M_DIGITS),
// where U is the drop one conducting cell causes on its integration capacitor
// during one integration phase (about 255 mV in the paper's simulation).
//   Positive side, per weight-bit column k (capacitor C_p,k = C_f / 2^(W_BITS-k)):
//     S2 & SP : cp[k] <= 0                   (reset to Vdd)
//     SP & ~S2: cp[k] <= cp[k] + col_cnt[k]  (integrate, counts in units of U)
//   Negative side likewise with S3, SN and cn[k].
//   S4 & S5 (charge redistribution): the column capacitors (total C_f) and the
//   sampling capacitor C_S = C_f share charge, so
//     vp <= (sum_k cp[k] * 2^k * 2^(2*M_DIGITS) + vp) / 2
//   and vn likewise. The division is exact: over one MAC vp is halved 2*M
//   times and every term carries 2^(2*M) in it.
//   cs_rst: vp, vn <= 0 (C_S back to Vdd).
// Two redistributions per M-RD4 digit (half A: +-1 rows, half B: +-2 rows)
// give vp = sum_j 4^(j-M) (Va_j + 2 Vb_j), so after M digits
//   vout = vp - vn = sum_rows X_r * W_r   (exactly, in the units above).
// The capacitor ratios (C_f = 2^1 C_n-1 = ... = 2^n C_0, C_S = C_f) follow the
// paper's weighting figure; the integration is ideal and linear (no
// saturation of the capacitor voltage, no regulator error), which is this
// model's simplification. Outputs are registered; they change on the clock
// edge that ends a phase.
// The S1 and half_b bits of the switch bundle are not read here: the
// integrators follow SP/SN/S2/S3 and the word lines are gated elsewhere.
module integral_multiplier
  import cim_pkg::*;
#(
  parameter int ROWS     = 256,
  parameter int W_BITS   = 8,
  parameter int M_DIGITS = 4,
  parameter int VW       = $clog2(2 * ROWS + 1) + W_BITS + 2 * M_DIGITS + 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  sw_t                           sw,
  input  logic [$clog2(2*ROWS+1)-1:0]   col_cnt [W_BITS],
  output logic signed [VW-1:0]          vp,
  output logic signed [VW-1:0]          vn
);

  localparam int CNTW = $clog2(2 * ROWS + 1);
  localparam int AW   = CNTW + 4;  // integrated count, four phases of margin

  logic [AW-1:0] cp [W_BITS];
  logic [AW-1:0] cn [W_BITS];

  function automatic logic signed [VW-1:0] weighted(input logic [AW-1:0] c [W_BITS]);
    logic signed [VW-1:0] s;
    s = '0;
    for (int k = 0; k < W_BITS; k++)
      s = s + (VW'(c[k]) <<< (k + 2 * M_DIGITS));
    return s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < W_BITS; k++) begin
        cp[k] <= '0;
        cn[k] <= '0;
      end
      vp <= '0;
      vn <= '0;
    end else begin
      for (int k = 0; k < W_BITS; k++) begin
        if (sw.s2 && sw.sp)      cp[k] <= '0;
        else if (sw.sp)          cp[k] <= cp[k] + AW'(col_cnt[k]);
        if (sw.s3 && sw.sn)      cn[k] <= '0;
        else if (sw.sn)          cn[k] <= cn[k] + AW'(col_cnt[k]);
      end
      if (sw.cs_rst) begin
        vp <= '0;
        vn <= '0;
      end else if (sw.s4 && sw.s5) begin
        vp <= (weighted(cp) + vp) >>> 1;
        vn <= (weighted(cn) + vn) >>> 1;
      end
    end
  end

endmodule
