// tb_cim_controller: self-checking test of the MAC sequencer.
//
// Runs two MAC operations and compares the switch settings of every cycle
// with the expected phase list (INIT, then per digit and half: P_CLR, P_INT,
// N_CLR, N_INT, REDIST, then ADC_BITS+1 conversion cycles). Checks the
// number of busy cycles (1 + 10*M + ADC_BITS + 1), the recoder load and
// advance pulses, the single ADC start, and that a start while busy is
// ignored.
module tb_cim_controller;
  import cim_pkg::*;

  localparam int M = 4;
  localparam int AB = 8;

  logic   clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  sw_t    sw;
  logic   enc_load, enc_advance, adc_start, busy;
  phase_e phase;
  logic [$clog2(M+1)-1:0] digit_idx;
  int checks = 0, failures = 0;

  cim_controller #(.M_DIGITS(M), .ADC_BITS(AB)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .sw(sw), .enc_load(enc_load),
    .enc_advance(enc_advance), .adc_start(adc_start), .busy(busy),
    .phase(phase), .digit_idx(digit_idx)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
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

  // expected {s1,sp,sn,s2,s3,s4,s5,cs_rst} for a phase-in-half index 0..4
  function automatic logic [7:0] exp_sw(int p);
    case (p)
      0: return 8'b0101_0000;  // P_CLR : SP, S2
      1: return 8'b1100_0000;  // P_INT : S1, SP
      2: return 8'b0010_1000;  // N_CLR : SN, S3
      3: return 8'b1010_0000;  // N_INT : S1, SN
      default: return 8'b0000_0110;  // REDIST: S4, S5
    endcase
  endfunction

  function automatic logic [7:0] got_sw();
    return {sw.s1, sw.sp, sw.sn, sw.s2, sw.s3, sw.s4, sw.s5, sw.cs_rst};
  endfunction

  task automatic run_mac(input bit poke_start);
    int busy_cycles, adv, adcs;
    @(negedge clk);
    start = 1'b1;
    #1;
    check(enc_load == 1'b1, "enc_load with accepted start");
    @(negedge clk);
    start = 1'b0;
    // INIT
    check(busy && got_sw() == 8'b0000_0001, "INIT: only cs_rst");
    busy_cycles = 1; adv = 0; adcs = 0;
    for (int d = 0; d < M; d++) begin
      for (int h = 0; h < 2; h++) begin
        for (int p = 0; p < 5; p++) begin
          @(negedge clk);
          busy_cycles++;
          start = poke_start && d == 1 && p == 2;  // must be ignored
          check(got_sw() == exp_sw(p),
                $sformatf("digit %0d half %0d phase %0d: sw=%b exp %b", d, h, p, got_sw(), exp_sw(p)));
          check(sw.half_b == h[0], "half_b");
          check(int'(digit_idx) == d, "digit index");
          check(enc_load == 1'b0, "no reload while busy");
          if (enc_advance) begin
            adv++;
            check(h == 1 && p == 4, "advance only at end of half B");
          end
        end
      end
    end
    start = 1'b0;
    check(adv == M, "M advances");
    for (int c = 0; c <= AB; c++) begin
      @(negedge clk);
      busy_cycles++;
      check(busy && got_sw() == 8'b0, $sformatf("CONV cycle %0d: all switches open", c));
      if (adc_start) begin
        adcs++;
        check(c == 0, "adc_start in first CONV cycle");
      end
    end
    @(negedge clk);
    check(!busy, "idle after conversion");
    check(busy_cycles == 1 + 10 * M + AB + 1,
          $sformatf("busy cycles %0d exp %0d", busy_cycles, 1 + 10 * M + AB + 1));
    check(adcs == 1, "one adc_start");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!busy && got_sw() == 8'b0, "idle after reset");
    run_mac(1'b0);
    run_mac(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
