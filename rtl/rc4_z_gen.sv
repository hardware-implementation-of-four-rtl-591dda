// rc4_z_gen: Z1/Z2 keystream generator of the 2-byte-per-clock RC4 core.
//
// For the two unrolled PRGA iterations of one clock the keystream bytes are
//   Z1 = S1[t1],  t1 = S1[i1] + S1[j1] = S0[i1] + S0[j1]
//   Z2 = S2[t2],  t2 = S2[i2] + S2[j2] = S1[i2] + S1[j2]
// where S0, S1, S2 are the S-box before, between and after the two swaps.
// t1 is Adder20. t2 is one of seven sums of two S0 bytes, chosen by an 8:1
// MUX3 whose select is the three comparators Comp6 (i2 == j1), Comp7
// (j2 == i1) and Comp8 (j2 == j1), following the paper's table of Z2 cases.
//
// Stage A (the clock in which the swap happens, step high): t1, t2 and the
// indices i2, j2 are registered. Stage B (the next clock): the S-box now
// holds S2, and the 256:2 MUX4 reads Z2 = S2[t2] directly. For Z1 the
// byte is needed from S1, not S2; S1 is S2 with the second swap undone, so
// the read address of Z1 is t1 with i2 and j2 exchanged
// (t1 == i2 -> j2, t1 == j2 -> i2). That remap is this design's addition:
// the paper's timing list reads Z1 from S1, while its hardware reads the
// S-box only after the clock in which both swaps are written.
//
// Timing: z_valid is high in the clock after a step clock, with z1/z2
// combinational from s_q in that clock. Synchronous active-low reset.
module rc4_z_gen
  import rc4_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  step,        // a PRGA swap happens at this clock's edge
  input  byte_t i1,
  input  byte_t i2,
  input  byte_t j1,
  input  byte_t j2,
  input  byte_t s_i1,        // S0[i1]
  input  byte_t s_i2,        // S0[i2]
  input  byte_t s_j1,        // S0[j1]
  input  byte_t s_j2,        // S0[j2]
  input  byte_t s_q [N],     // S-box bank, read by MUX4
  output byte_t z1,
  output byte_t z2,
  output logic  z_valid
);

  // ---- stage A: key stream addresses ----
  logic  comp6, comp7, comp8;
  byte_t add13, add14, add15, add16, add17, add20;
  byte_t t1, t2;

  always_comb begin
    comp6 = (i2 == j1);
    comp7 = (j2 == i1);
    comp8 = (j2 == j1);
    add13 = s_i2 + s_j2;     // case 1
    add14 = s_i2 + s_i1;     // case 2
    add15 = s_i2 + s_j1;     // cases 3, 4
    add16 = s_i1 + s_j2;     // case 5
    add17 = s_i1 + s_i1;     // case 6
    add20 = s_i1 + s_j1;     // t1, and case 7
    t1    = add20;
    unique case ({comp6, comp7, comp8})   // MUX3
      3'b000:  t2 = add13;
      3'b001:  t2 = add14;
      3'b010:  t2 = add15;
      3'b011:  t2 = add15;
      3'b100:  t2 = add16;
      3'b101:  t2 = add17;
      default: t2 = add20;   // 3'b110; 3'b111 cannot occur
    endcase
  end

  byte_t t1_q, t2_q, i2_q, j2_q;
  logic  valid_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      t1_q <= '0; t2_q <= '0; i2_q <= '0; j2_q <= '0;
    end else begin
      valid_q <= step;
      if (step) begin
        t1_q <= t1;
        t2_q <= t2;
        i2_q <= i2;
        j2_q <= j2;
      end
    end
  end

  // ---- stage B: 256:2 MUX4 on the updated S-box ----
  byte_t t1_s2;
  always_comb begin
    if (t1_q == i2_q)      t1_s2 = j2_q;
    else if (t1_q == j2_q) t1_s2 = i2_q;
    else                   t1_s2 = t1_q;
  end

  assign z1      = s_q[t1_s2];
  assign z2      = s_q[t2_q];
  assign z_valid = valid_q;

endmodule
