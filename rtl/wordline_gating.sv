// wordline_gating: drives the two word lines of every row of the differential
// array from that row's M-RD4 digit and the current integration phase.
//
// Each row holds 1R1T pairs: the b cell (bit of the positive weight w_p) on
// word line wl_p and the c cell (bit of the negative weight w_n) on wl_n.
// The positive integrator must collect I_p*W_p + I_n*W_n and the negative one
// I_p*W_n + I_n*W_p, so
//   positive phase (SP, S1 closed): digit > 0 drives wl_p, digit < 0 drives wl_n
//   negative phase (SN, S1 closed): digit > 0 drives wl_n, digit < 0 drives wl_p
// Half A of a digit period applies rows whose digit is +-1, half B rows whose
// digit is +-2; a 0 digit never drives its row (the bypass that saves power).
// Rows are not driven while the integration capacitors are being cleared
// (S2 or S3 closed). Purely combinational; ROWS rows.
// The gating rule follows the paper's description of the S1/SP/SN phases and
// of the IN_p/IN_n pulses; expressing it as this gate network is this
// design's own choice.
// Only S1, SP, SN, S2, S3 and half_b of the switch bundle matter here; the
// other bits of `sw` are left unread on purpose.
module wordline_gating
  import cim_pkg::*;
#(
  parameter int ROWS = 256
) (
  input  mrd4_t            digit [ROWS],
  input  sw_t              sw,
  output logic [ROWS-1:0]  wl_p,
  output logic [ROWS-1:0]  wl_n
);

  logic int_pos, int_neg;
  assign int_pos = sw.s1 & sw.sp & ~sw.s2;
  assign int_neg = sw.s1 & sw.sn & ~sw.s3;

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      logic d_pos, d_neg;
      d_pos = sw.half_b ? digit[r].z2  : digit[r].z1;
      d_neg = sw.half_b ? digit[r].zm2 : digit[r].zm1;
      wl_p[r] = (int_pos & d_pos) | (int_neg & d_neg);
      wl_n[r] = (int_pos & d_neg) | (int_neg & d_pos);
    end
  end

endmodule
