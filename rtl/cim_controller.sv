// cim_controller: sequences one MAC operation of the core.
//
// After `start` (accepted when idle) the controller runs
//   INIT                       : C_S returned to Vdd (cs_rst), recoders hold x
//   for each of M_DIGITS digits, LSB first, and each half (A: +-1, B: +-2):
//     P_CLR  S2,SP  clear the positive integration capacitors
//     P_INT  S1,SP  integrate the rows into the positive capacitors
//     N_CLR  S3,SN  clear the negative integration capacitors
//     N_INT  S1,SN  integrate the rows into the negative capacitors
//     REDIST S4,S5  share charge of the weight-bit capacitors with C_S
//   CONV                       : S5 open, ADCs convert for ADC_BITS+1 cycles
// The recoders are loaded in the cycle `start` is accepted (enc_load) and
// advanced in the REDIST cycle of half B (enc_advance). adc_start is high in
// the first CONV cycle. One MAC takes 1 + 10*M_DIGITS + ADC_BITS + 1 cycles
// from the cycle after `start` to the cycle `busy` falls; the ADC result is
// valid in the cycle after the last CONV cycle.
// The phase order (clear, integrate, positive then negative, then charge
// redistribution; two integration pairs and two redistributions per digit)
// follows the paper's text. One clock cycle per phase, the INIT cycle and the
// way the ADC is started are this design's choices; the paper's timing
// diagram is not available.
// The two assertions use rst_n in `disable iff`, which the linter reports as
// a reset used both asynchronously and synchronously; the flops themselves
// use only the asynchronous reset.
module cim_controller
  import cim_pkg::*;
#(
  parameter int M_DIGITS = 4,
  parameter int ADC_BITS = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  output sw_t    sw,
  output logic   enc_load,
  output logic   enc_advance,
  output logic   adc_start,
  output logic   busy,
  output phase_e phase,
  output logic [$clog2(M_DIGITS+1)-1:0] digit_idx
);

  localparam int DW = $clog2(M_DIGITS + 1);
  localparam int CW = $clog2(ADC_BITS + 2);

  phase_e        ph_q;
  logic          half_b_q;
  logic [DW-1:0] dig_q;
  logic [CW-1:0] conv_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_q     <= PH_IDLE;
      half_b_q <= 1'b0;
      dig_q    <= '0;
      conv_q   <= '0;
    end else begin
      unique case (ph_q)
        PH_IDLE:   if (start) begin
                     ph_q     <= PH_INIT;
                     half_b_q <= 1'b0;
                     dig_q    <= '0;
                   end
        PH_INIT:   ph_q <= PH_P_CLR;
        PH_P_CLR:  ph_q <= PH_P_INT;
        PH_P_INT:  ph_q <= PH_N_CLR;
        PH_N_CLR:  ph_q <= PH_N_INT;
        PH_N_INT:  ph_q <= PH_REDIST;
        PH_REDIST: begin
                     if (!half_b_q) begin
                       half_b_q <= 1'b1;
                       ph_q     <= PH_P_CLR;
                     end else if (dig_q == DW'(M_DIGITS - 1)) begin
                       half_b_q <= 1'b0;
                       dig_q    <= dig_q + 1'b1;
                       conv_q   <= '0;
                       ph_q     <= PH_CONV;
                     end else begin
                       half_b_q <= 1'b0;
                       dig_q    <= dig_q + 1'b1;
                       ph_q     <= PH_P_CLR;
                     end
                   end
        PH_CONV:   begin
                     conv_q <= conv_q + 1'b1;
                     if (conv_q == CW'(ADC_BITS)) ph_q <= PH_IDLE;
                   end
        default:   ph_q <= PH_IDLE;
      endcase
    end
  end

  always_comb begin
    sw          = '0;
    sw.half_b   = half_b_q;
    enc_load    = (ph_q == PH_IDLE) && start;
    enc_advance = (ph_q == PH_REDIST) && half_b_q;
    adc_start   = (ph_q == PH_CONV) && (conv_q == '0);
    unique case (ph_q)
      PH_INIT:   sw.cs_rst = 1'b1;
      PH_P_CLR:  begin sw.s2 = 1'b1; sw.sp = 1'b1; end
      PH_P_INT:  begin sw.s1 = 1'b1; sw.sp = 1'b1; end
      PH_N_CLR:  begin sw.s3 = 1'b1; sw.sn = 1'b1; end
      PH_N_INT:  begin sw.s1 = 1'b1; sw.sn = 1'b1; end
      PH_REDIST: begin sw.s4 = 1'b1; sw.s5 = 1'b1; end
      default:   ;
    endcase
  end

  assign busy      = (ph_q != PH_IDLE);
  assign phase     = ph_q;
  assign digit_idx = dig_q;

  // A digit index never passes M_DIGITS; the two integrations never overlap.
  a_dig_range: assert property (@(posedge clk) disable iff (!rst_n) dig_q <= DW'(M_DIGITS));
  a_one_side:  assert property (@(posedge clk) disable iff (!rst_n) !(sw.sp && sw.sn));

endmodule
