// rc4_j_gen: j1/j2 generator of the 2-byte-per-clock dynamic KSA-PRGA core.
//
// Two RC4 iterations are unrolled into one clock. With j0 the j of the
// previous clock, S0 the S-box before this clock and S1 the S-box after the
// first of the two swaps:
//   j1 = j0 + S0[i1] + K[i1]
//   j2 = j1 + S1[i2] + K[i2]
// S1 differs from S0 only at i1 and j1, and i2 = i1 + 1 can never equal i1,
// so S1[i2] = S0[i1] when i2 == j1 and S0[i2] otherwise. Both candidates
// for j2 are formed in parallel and a comparator on (i2, j1) selects one.
//
// The adder/MUX network is the paper's: MUX1/MUX2/MUX4 pass K[i1], K[i2]
// during KSA and 0 once prga_en is high (then the same circuit computes
// the PRGA j), Adder1 = K1+K2, Adder2 = +j0, Adder3 = +S[i2], Adder4 =
// +S[i1], Adder5 = +S[i1], Adder6 = +S[i1], Adder8 = j0+S[i1], Adder7 =
// +K[i1] gives j1, and MUX3 picks j2. All sums are mod 256.
//
// Purely combinational.
module rc4_j_gen
  import rc4_pkg::*;
(
  input  logic  prga_en,
  input  byte_t j0,
  input  byte_t i2,
  input  byte_t s_i1,     // S0[i1]
  input  byte_t s_i2,     // S0[i2]
  input  byte_t k_i1,     // K[i1]
  input  byte_t k_i2,     // K[i2]
  output byte_t j1,
  output byte_t j2
);

  byte_t mux1, mux2, mux4;
  logic  i2_eq_j1;                 // the comparator
  byte_t add1, add2, add3, add4, add5, add6, add7, add8;

  always_comb begin
    mux1 = prga_en ? 8'd0 : k_i1;
    mux2 = prga_en ? 8'd0 : k_i2;
    mux4 = prga_en ? 8'd0 : k_i1;
    add1 = mux1 + mux2;
    add2 = add1 + j0;
    add3 = add2 + s_i2;
    add4 = add2 + s_i1;
    add5 = add3 + s_i1;          // j0 + S[i1] + S[i2] (+ keys)
    add6 = add4 + s_i1;          // j0 + S[i1] + S[i1] (+ keys)
    add8 = j0 + s_i1;
    add7 = add8 + mux4;          // j1
    j1       = add7;
    i2_eq_j1 = (i2 == add7);
    j2       = i2_eq_j1 ? add6 : add5;
  end

endmodule
