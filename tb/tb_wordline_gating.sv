// tb_wordline_gating: self-checking test of the word-line gating.
//
// Random M-RD4 digits and all combinations of the switch bits that matter are
// applied; for every row the expected word lines are derived from the sign of
// the product the integrator is meant to collect: the positive integrator
// takes (+input, b cell) and (-input, c cell), the negative one the other two.
module tb_wordline_gating;
  import cim_pkg::*;

  localparam int ROWS = 16;

  mrd4_t           digit [ROWS];
  sw_t             sw;
  logic [ROWS-1:0] wl_p, wl_n;
  int checks = 0, failures = 0;

  wordline_gating #(.ROWS(ROWS)) dut (.digit(digit), .sw(sw), .wl_p(wl_p), .wl_n(wl_n));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic mrd4_t make_digit(int v);
    mrd4_t d = '0;
    case (v)
      2: d.z2 = 1'b1;  -2: d.zm2 = 1'b1;
      1: d.z1 = 1'b1;  -1: d.zm1 = 1'b1;
      default: ;
    endcase
    return d;
  endfunction

  initial begin
    int v [ROWS];
    for (int iter = 0; iter < 400; iter++) begin
      for (int r = 0; r < ROWS; r++) begin
        v[r] = int'($urandom_range(0, 4)) - 2;
        digit[r] = make_digit(v[r]);
      end
      sw = sw_t'($urandom);
      #1;
      for (int r = 0; r < ROWS; r++) begin
        bit applied, pos_int, neg_int, exp_p, exp_n;
        applied = sw.half_b ? (v[r] == 2 || v[r] == -2) : (v[r] == 1 || v[r] == -1);
        pos_int = sw.s1 && sw.sp && !sw.s2;
        neg_int = sw.s1 && sw.sn && !sw.s3;
        // b cell feeds +input*W_p (positive) or -input*W_p (negative result)
        exp_p = applied && ((pos_int && v[r] > 0) || (neg_int && v[r] < 0));
        exp_n = applied && ((pos_int && v[r] < 0) || (neg_int && v[r] > 0));
        checks++;
        if (wl_p[r] !== exp_p || wl_n[r] !== exp_n) begin
          failures++;
          if (failures < 10)
            $display("FAIL row %0d digit %0d sw=%b: wl_p=%b wl_n=%b exp %b %b",
                     r, v[r], sw, wl_p[r], wl_n[r], exp_p, exp_n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
