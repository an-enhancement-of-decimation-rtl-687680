// cic_pkg: constants shared by the CIC decimator and its testbenches.
//
// The filter is a Hogenauer cascaded integrator-comb (CIC) decimator with
// N = 5 stages, differential delay M = 1 and decimation factor R = 16, so its
// DC gain is (R*M)^N = 2^20. With a 5-bit two's-complement input the
// full-precision word is 5 + 20 = 25 bits, which is the first integrator's
// width. The later integrators are pruned (low bits discarded at their input)
// to 22, 20, 18 and 16 bits, and all five combs work on 16 bits. N, M, R and
// the stage widths are the paper's numbers; the input width of 5 bits is this
// design's reading of the 25-bit first stage (see cic_decimator).
package cic_pkg;

  localparam int unsigned CIC_N    = 5;   // number of integrator/comb stages
  localparam int unsigned CIC_M    = 1;   // differential delay of each comb
  localparam int unsigned CIC_R    = 16;  // decimation factor
  localparam int unsigned CIC_B_IN = 5;   // input word length (two's complement)

  // Register width of integrators 1..5, left to right.
  localparam int unsigned CIC_INT_W [CIC_N] = '{25, 22, 20, 18, 16};


  // Full-precision word length Hogenauer's bound gives for the first stage:
  // B_in + N*log2(R*M) bits, i.e. (R*M)^N growth on top of the input word.
  function automatic int unsigned full_precision_width(int unsigned n, int unsigned r,
                                                       int unsigned m, int unsigned b_in);
    return b_in + n * $clog2(r * m);
  endfunction

endpackage
