// polar_pkg: shared constants of the combinational successive-cancellation
// (SC) polar decoder family.
//
// LLRs everywhere are Q-bit sign-magnitude words: bit Q-1 is the sign
// (1 = negative, i.e. the binary sign function s(l) used for hard decisions)
// and bits Q-2:0 are the magnitude. Vectors of LLRs are packed arrays
// [len-1:0][Q-1:0] whose element i is l_i. Decision vectors are [len-1:0]
// with bit i = u_i. Frozen-bit indicator vectors use a_i = 1 for a data bit
// and a_i = 0 for a frozen bit (frozen bits are fixed to zero).
//
// The defaults are the sizes the design is reported at: Q = 5 quantisation
// bits, block length N = 1024, and for the hybrid-logic decoder a component
// code length N' = 64. COMB_WAIT_DEF is the number of synchronous clock cycles
// the hybrid decoder allows its combinational part; 14 = ceil(D_64 * f_c) with
// D_64 = 64 bit / 0.85 Gb/s (FPGA combinational decoder, N = 64) and
// f_c = 173 MHz (semi-parallel synchronous decoder), both reported figures.
package polar_pkg;
  localparam int unsigned Q_DEF         = 5;
  localparam int unsigned N_DEF         = 1024;
  localparam int unsigned NP_DEF        = 64;
  localparam int unsigned COMB_WAIT_DEF = 14;
endpackage
