// mcsd_encoder: converts a signed weight into the differential Modified
// Canonical Signed Digit (M-CSD) pair (w_p, w_n) written into the RRAM pairs.
//
// A weight w in [-(2^W_BITS-1), 2^W_BITS-1] is first split differentially:
// its magnitude goes into w_p when w > 0 and into w_n when w < 0, i.e. every
// digit is 1 (or -1) or 0. The M-CSD rewrite of the paper's algorithm is then
// applied to the digit string d[W_BITS-1:0] (1, 0, -1):
//   1. From the MSB down, skip the leading run of non-zero digits and stop one
//      position below the first 0 (index i). Strings that contain the MSB are
//      left alone.
//   2. Scan j = 0 .. i-1 from the LSB:
//        d[j+4:j] = 1 1 0 1 1    -> d[j+2:j] = 1 0 -1, j += 2
//        d[j+4:j] = -1 -1 0 -1 -1 -> d[j+2:j] = -1 0 1, j += 2
//        d[j+2:j] = 1 1 1         -> run of 1s up to k: d[k:j] = 1 0..0 -1, j = k
//        d[j+2:j] = -1 -1 -1      -> run of -1s up to k: d[k:j] = -1 0..0 1, j = k
//        otherwise j += 1
// Digit +1 becomes a 1 in w_p, digit -1 a 1 in w_n; w_p - w_n always equals w.
// Examples from the paper: -119 -> w_p 00001001, w_n 10000000;
// 123 -> w_p 10000000, w_n 00000101.
//
// The block is purely combinational and is placed on the weight-write path
// of the core. The paper gives the algorithm for weights trained offline and
// does not say where it runs; making it hardware is this design's choice.
// The scan is unrolled W_BITS+1 times (j grows by at least 1 per pass).
module mcsd_encoder #(
  parameter int W_BITS = 8
) (
  input  logic signed [W_BITS:0]   w,
  output logic        [W_BITS-1:0] w_p,
  output logic        [W_BITS-1:0] w_n
);

  localparam int L = W_BITS + 6;  // digit string with zero padding above MSB

  logic [W_BITS-1:0] mag;
  logic              neg;

  always_comb begin
    logic signed [1:0] d [L];
    int i, j, k;
    logic flag, stop;

    k = 0;
    stop = 1'b0;
    neg = w[W_BITS];
    mag = neg ? W_BITS'(-w) : W_BITS'(w);
    for (int p = 0; p < L; p++) d[p] = 2'sd0;
    for (int p = 0; p < W_BITS; p++)
      if (mag[p]) d[p] = neg ? -2'sd1 : 2'sd1;

    // Step 1: locate the string that contains the MSB.
    i = W_BITS - 1;
    flag = 1'b0;
    for (int it = 0; it < W_BITS; it++) begin
      if (i > 0 && !flag) begin
        if (d[i] == 2'sd0) flag = 1'b1;
        i = i - 1;
      end
    end

    // Step 2: rewrite from the LSB up to position i.
    j = 0;
    for (int it = 0; it <= W_BITS; it++) begin
      if (j < i) begin
        if (d[j+4] == 2'sd1 && d[j+3] == 2'sd1 && d[j+2] == 2'sd0 &&
            d[j+1] == 2'sd1 && d[j] == 2'sd1) begin
          d[j+2] = 2'sd1; d[j+1] = 2'sd0; d[j] = -2'sd1;
          j = j + 2;
        end else if (d[j+4] == -2'sd1 && d[j+3] == -2'sd1 && d[j+2] == 2'sd0 &&
                     d[j+1] == -2'sd1 && d[j] == -2'sd1) begin
          d[j+2] = -2'sd1; d[j+1] = 2'sd0; d[j] = 2'sd1;
          j = j + 2;
        end else if (d[j+2] == d[j+1] && d[j+1] == d[j] && d[j] != 2'sd0) begin
          // run of equal non-zero digits starting at j, ending below k
          k = j + 2;
          stop = 1'b0;
          for (int p = 0; p < L; p++) begin
            if (!stop && p > j + 2 && p < L) begin
              if (d[p] == d[j]) k = p;
              else stop = 1'b1;
            end
          end
          k = k + 1;
          for (int p = 0; p < L; p++) begin
            if (p == k)               d[p] = d[j];
            else if (p > j && p < k)  d[p] = 2'sd0;
          end
          d[j] = -d[j];
          j = k;
        end else begin
          j = j + 1;
        end
      end
    end

    for (int p = 0; p < W_BITS; p++) begin
      w_p[p] = (d[p] == 2'sd1);
      w_n[p] = (d[p] == -2'sd1);
    end
  end

endmodule
