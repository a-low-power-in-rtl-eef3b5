// cim_pkg: types shared by the blocks of the differential in-memory MAC core.
//
// mrd4_t is the one-hot output of a Modified Radix-4 (M-RD4) recoder for one
// input line: at most one of z2, zm2, z1, zm1 is high (digit 2, -2, 1, -1);
// all low means digit 0, which bypasses the row. sw_t is the bundle of switch
// controls of the integral multiplier (S1, SP, SN, S2, S3, S4, S5 follow the
// switch names of the neuron circuit); cs_rst and half_b are additions of this
// design: cs_rst returns the sampling capacitors to Vdd before a MAC, half_b
// tells the word-line gating that the +-2 digits are being integrated.
package cim_pkg;

  typedef struct packed {
    logic z2;
    logic zm2;
    logic z1;
    logic zm1;
  } mrd4_t;

  typedef struct packed {
    logic s1;      // word lines enabled (data input)
    logic sp;      // column routed to the positive integrator
    logic sn;      // column routed to the negative integrator
    logic s2;      // clear positive integration capacitors
    logic s3;      // clear negative integration capacitors
    logic s4;      // charge redistribution onto C_S
    logic s5;      // C_S connected to the ADC (sample)
    logic cs_rst;  // return C_S to Vdd before the first digit
    logic half_b;  // current half integrates the +-2 digits
  } sw_t;

  // Controller phases. A digit takes two halves (A: +-1 rows, B: +-2 rows);
  // each half runs P_CLR, P_INT, N_CLR, N_INT, REDIST.
  typedef enum logic [2:0] {
    PH_IDLE   = 3'd0,
    PH_INIT   = 3'd1,
    PH_P_CLR  = 3'd2,
    PH_P_INT  = 3'd3,
    PH_N_CLR  = 3'd4,
    PH_N_INT  = 3'd5,
    PH_REDIST = 3'd6,
    PH_CONV   = 3'd7
  } phase_e;

  // Signed value of an M-RD4 digit.
  function automatic int mrd4_value(mrd4_t d);
    return d.z2 ? 2 : d.zm2 ? -2 : d.z1 ? 1 : d.zm1 ? -1 : 0;
  endfunction

endpackage
