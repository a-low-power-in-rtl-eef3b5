// tb_integral_multiplier: self-checking test of the integrator model.
//
// 1. The paper's transient example: one row, weight 123 stored as
//    w_p = 10000000, w_n = 00000101, input 125 as M-RD4 digits 1, -1, 0, 2.
//    After each charge redistribution the differential output, scaled by the
//    single-cell drop of the paper's simulation (254.6 mV), must match the
//    printed waveform values 61.19, 30.49, -46.12, -23.09, -11.66, -5.85,
//    -2.93 and 59.73 mV within 0.5 mV; the final integer must be 125*123.
// 2. Random column counts for every half of every digit: the final vp and vn
//    must equal sum_j sum_k 4^j 2^k (cntA + 2 cntB), the closed form of the
//    two halvings per digit.
// The testbench drives the switch sequence itself (one phase per cycle).
module tb_integral_multiplier;
  import cim_pkg::*;

  localparam int ROWS = 16, W = 8, M = 4;
  localparam int CNTW = $clog2(2 * ROWS + 1);
  localparam int VW = CNTW + W + 2 * M + 4;

  logic clk = 1'b0, rst_n = 1'b0;
  sw_t  sw = '0;
  logic [CNTW-1:0] col_cnt [W];
  logic signed [VW-1:0] vp, vn;
  int checks = 0, failures = 0;

  integral_multiplier #(.ROWS(ROWS), .W_BITS(W), .M_DIGITS(M), .VW(VW)) dut (
    .clk(clk), .rst_n(rst_n), .sw(sw), .col_cnt(col_cnt), .vp(vp), .vn(vn)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
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

  task automatic phase(input sw_t s, input int cnt [W]);
    @(negedge clk);
    sw = s;
    for (int k = 0; k < W; k++) col_cnt[k] = CNTW'(cnt[k]);
    @(posedge clk);
    #1;
  endtask

  // One half: positive counts, negative counts.
  task automatic half(input int pc [W], input int nc [W], input bit hb);
    sw_t s;
    int z [W];
    foreach (z[k]) z[k] = 0;
    s = '0; s.half_b = hb; s.s2 = 1; s.sp = 1; phase(s, z);
    s = '0; s.half_b = hb; s.s1 = 1; s.sp = 1; phase(s, pc);
    s = '0; s.half_b = hb; s.s3 = 1; s.sn = 1; phase(s, z);
    s = '0; s.half_b = hb; s.s1 = 1; s.sn = 1; phase(s, nc);
    s = '0; s.half_b = hb; s.s4 = 1; s.s5 = 1; phase(s, z);
  endtask

  task automatic cs_reset();
    sw_t s;
    int z [W];
    foreach (z[k]) z[k] = 0;
    s = '0; s.cs_rst = 1; phase(s, z);
  endtask

  initial begin
    int wp_bits [W], wn_bits [W], zero [W];
    int dig [M];
    real exp_mv [8];
    int idx;
    longint ep, en;
    exp_mv = '{61.19, 30.49, -46.12, -23.09, -11.66, -5.85, -2.93, 59.73};
    foreach (zero[k]) zero[k] = 0;
    foreach (col_cnt[k]) col_cnt[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // ---- 1: the paper's example
    foreach (wp_bits[k]) begin wp_bits[k] = 0; wn_bits[k] = 0; end
    wp_bits[7] = 1; wn_bits[2] = 1; wn_bits[0] = 1;   // 123 = 128 - 5
    dig = '{1, -1, 0, 2};                              // LSB first
    cs_reset();
    idx = 0;
    for (int j = 0; j < M; j++) begin
      for (int h = 0; h < 2; h++) begin
        bit act;
        real mv;
        act = (h == 0) ? (dig[j] == 1 || dig[j] == -1) : (dig[j] == 2 || dig[j] == -2);
        if (!act)          half(zero, zero, h[0]);
        else if (dig[j] > 0) half(wp_bits, wn_bits, h[0]);  // + input: b cells to pos
        else               half(wn_bits, wp_bits, h[0]);  // - input: c cells to pos
        mv = real'(vp - vn) * 254.6 / 65536.0;
        check(mv - exp_mv[idx] < 0.5 && exp_mv[idx] - mv < 0.5,
              $sformatf("step %0d: %f mV, paper %f mV", idx, mv, exp_mv[idx]));
        idx++;
      end
    end
    check(vp - vn == 125 * 123, $sformatf("example integer %0d exp %0d", vp - vn, 125 * 123));

    // ---- 2: random counts against the closed form
    for (int iter = 0; iter < 50; iter++) begin
      int pa [M][W], pb [M][W], na [M][W], nb [M][W];
      ep = 0; en = 0;
      cs_reset();
      for (int j = 0; j < M; j++) begin
        int t1 [W], t2 [W];
        for (int k = 0; k < W; k++) begin
          pa[j][k] = $urandom_range(0, ROWS); na[j][k] = $urandom_range(0, ROWS);
          pb[j][k] = $urandom_range(0, ROWS); nb[j][k] = $urandom_range(0, ROWS);
          ep += (longint'(1) << (2 * j + k)) * (pa[j][k] + 2 * pb[j][k]);
          en += (longint'(1) << (2 * j + k)) * (na[j][k] + 2 * nb[j][k]);
        end
        t1 = pa[j]; t2 = na[j]; half(t1, t2, 1'b0);
        t1 = pb[j]; t2 = nb[j]; half(t1, t2, 1'b1);
      end
      check(longint'(vp) == ep && longint'(vn) == en,
            $sformatf("random %0d: vp=%0d exp %0d vn=%0d exp %0d", iter, vp, ep, vn, en));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
