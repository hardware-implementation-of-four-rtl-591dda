// rc4_quad_top: four-byte-per-clock RC4 keystream generator ("Design 6").
//
// Two RC4 co-processors, each the 2-byte-per-clock dynamic KSA-PRGA core,
// run side by side and are clocked together. The secret key is split into
// two parts, K0 for co-processor 1 and K1 for co-processor 2, so each core
// produces its own RC4 keystream. The co-processor interface controller
// packs the two bytes of each core into one 32-bit bus word per clock:
// Z0, Z1 from co-processor 1 and Z2, Z3 from co-processor 2, Z0 on bits
// 31..24. The main processor (outside this module) XORs each word with four
// plaintext bytes. Two cores of two bytes each fill exactly one 32-bit
// word, which is why the number of cores is two.
//
// Interface: start (one clock) loads both keys, starts both key schedules
// and drops any keystream words still queued; key[c]/key_len[c] is the key
// of core c (1..16 bytes, the caller does the split). After 1 + 128 + 1 clocks ksa_done goes high, and
// from then on one 32-bit word per clock is offered on word/word_valid
// while word_ready is high; lowering word_ready stalls the cores. The
// first word appears three clocks after ksa_done rises (one request clock,
// one Z read clock, one FIFO clock).
//
// The paper's clock control circuit is not built: one clock drives the
// cores and the controller. Ports are plain signals and arrays.
module rc4_quad_top
  import rc4_pkg::*;
#(
  parameter int unsigned NCORES  = 2,   // co-processors (32-bit bus / 2 bytes)
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  byte_t   key     [NCORES][KEY_MAX],
  input  keylen_t key_len [NCORES],
  output logic    ksa_done,
  output logic [16*NCORES-1:0] word,
  output logic    word_valid,
  input  logic    word_ready,
  output logic    overflow,
  output logic    swap_we   [NCORES],   // observation: S-box written
  output logic [2:0] swap_case [NCORES] // observation: swap case 1..7
);

  logic  prga_ready [NCORES];
  logic  prga_en    [NCORES];
  logic  z_valid    [NCORES];
  byte_t z          [NCORES][2];
  logic  z_req;

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    rc4_dkp2_core u_core (
      .clk, .rst_n, .start,
      .key(key[c]), .key_len(key_len[c]),
      .z_req,
      .prga_ready(prga_ready[c]), .prga_en(prga_en[c]),
      .z1(z[c][0]), .z2(z[c][1]), .z_valid(z_valid[c]),
      .swap_we(swap_we[c]), .swap_case(swap_case[c])
    );
  end

  always_comb begin
    ksa_done = 1'b1;
    for (int c = 0; c < NCORES; c++) ksa_done &= prga_en[c];
  end

  rc4_coproc_if #(
    .NCORES(NCORES), .BYTES_PER_CORE(2), .DEPTH(FIFO_DEPTH)
  ) u_if (
    .clk, .rst_n, .flush(start),
    .prga_ready, .z_valid, .z, .z_req,
    .word, .word_valid, .word_ready, .overflow
  );

endmodule
