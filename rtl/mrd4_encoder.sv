// mrd4_encoder: serial Modified Radix-4 (M-RD4) Booth recoder for one input
// line of the array.
//
// An unsigned IN_BITS-bit input X is recoded into M = ceil(IN_BITS/2) digits
// z_j in {-2,-1,0,1,2}, least significant first, one digit per step. The
// structure follows the recoder circuit of the paper:
//   * MUX block: a digit counter (the quaternary counter S_A S_B for 8 bits)
//     selects a_{i+3} a_{i+2} a_{i+1} = x[2j+2] x[2j+1] x[2j] of the latched
//     input, with 0 above the MSB (the "gnd" input of the top multiplexer).
//   * Converter: a_i is the Q flip-flop holding t_{i+2} of the previous step
//     (0 on the first step). F = ~a3 a2 ~a1 ~a0 rewrites 0100 to 0011 and
//     G = a3 ~a2 a1 a0 rewrites 1011 to 1100:
//       t2 = G | ~F a2,  t1 = F | ~G a1,  t0 = F | ~G a0.
//   * Encoder: Z2 = ~t2 t1 t0, Z-2 = t2 ~t1 ~t0, Z1 = ~t2 (t1^t0),
//     Z-1 = t2 (t1^t0); all low encodes digit 0.
// The digit weights satisfy sum_j 4^j z_j = X for every X below 2^(IN_BITS-1).
// With the MSB of an even-width input set, the top digit keeps the Booth sign
// weight as in the paper's circuit, so X is reproduced only in some cases
// (for example X = 128); see the design notes.
//
// Interface and timing: `load` latches x_in (the input register of the
// recoder), clears the counter and the flip-flop; the digit of step 0 is then
// on `digit` from the next cycle. Each cycle with `advance` high moves to the
// next digit (counter + 1, Q <= t2). `digit` is combinational from the
// registered state. `load` and `advance` gate the recoder clock; they are
// this design's choice (the paper clocks the counter once per digit).
module mrd4_encoder
  import cim_pkg::*;
#(
  parameter int IN_BITS = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  logic               advance,
  input  logic [IN_BITS-1:0] x_in,
  output mrd4_t              digit
);

  localparam int M  = (IN_BITS + 1) / 2;
  localparam int CW = $clog2(M + 1);

  logic [IN_BITS-1:0] x_q;
  logic [CW-1:0]      cnt_q;
  logic               q_q;     // a_i: t_{i+2} of the previous step

  // MUX block: x extended with zeros above the MSB.
  logic [2*M+2:0] x_ext;
  logic a3, a2, a1, a0;
  always_comb begin
    x_ext = '0;
    x_ext[IN_BITS-1:0] = x_q;
    a3 = x_ext[2*cnt_q + 2];
    a2 = x_ext[2*cnt_q + 1];
    a1 = x_ext[2*cnt_q];
    a0 = q_q;
  end

  // Converter block.
  logic f, g, t2, t1, t0;
  always_comb begin
    f  = ~a3 &  a2 & ~a1 & ~a0;
    g  =  a3 & ~a2 &  a1 &  a0;
    t2 = g | (~f & a2);
    t1 = f | (~g & a1);
    t0 = f | (~g & a0);
  end

  // Encoder block.
  always_comb begin
    digit.z2  = ~t2 &  t1 &  t0;
    digit.zm2 =  t2 & ~t1 & ~t0;
    digit.z1  = ~t2 & (t1 ^ t0);
    digit.zm1 =  t2 & (t1 ^ t0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q   <= '0;
      cnt_q <= '0;
      q_q   <= 1'b0;
    end else if (load) begin
      x_q   <= x_in;
      cnt_q <= '0;
      q_q   <= 1'b0;
    end else if (advance) begin
      cnt_q <= (cnt_q == CW'(M)) ? cnt_q : cnt_q + 1'b1;
      q_q   <= t2;
    end
  end

endmodule
