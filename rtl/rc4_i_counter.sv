// rc4_i_counter: the single "i counter" of the 2-byte-per-clock dynamic
// KSA-PRGA core. It gives two consecutive S-box indices per clock,
// i1 and i2 = i1 + 1 (mod 256), so that two RC4 iterations can be unrolled
// into one clock.
//
// Count sequence, as the core drives it:
//   clear  (KSA start)      : i1 = 0            -> KSA pairs (0,1),(2,3),..,(254,255)
//   clear  (after KSA)      : i1 = 0            -> the PRGA initialisation clock
//   step1  (leave PRGA init): i1 = 1            -> PRGA pairs (1,2),(3,4),..,(255,0),(1,2),..
//   step2                   : i1 = i1 + 2 mod 256
// The MOD-256 wrap and the two outputs follow the paper's description of
// this counter; the three control inputs (clear/step1/step2) are this
// design's choice of how the core tells the counter what to do. Priority is
// clear > step1 > step2. last_ksa flags the final KSA pair (i1 = 254).
//
// Timing: i1/i2 are registered; a control input takes effect at the next
// rising edge of clk. Synchronous active-low reset to i1 = 0.
module rc4_i_counter
  import rc4_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,     // i1 <= 0
  input  logic  step1,     // i1 <= i1 + 1
  input  logic  step2,     // i1 <= i1 + 2
  output byte_t i1,
  output byte_t i2,
  output logic  last_ksa   // i1 == 254, i.e. the pair (254,255)
);

  byte_t cnt;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) cnt <= '0;
    else if (step1)      cnt <= cnt + 8'd1;
    else if (step2)      cnt <= cnt + 8'd2;
  end

  assign i1       = cnt;
  assign i2       = cnt + 8'd1;   // wraps 255 -> 0
  assign last_ksa = (cnt == 8'd254);

endmodule
