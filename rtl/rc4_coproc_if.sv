// rc4_coproc_if: co-processor interface controller of the 4-byte-per-clock
// RC4 system.
//
// Several RC4 co-processors each deliver BYTES_PER_CORE keystream bytes per
// clock, signalled by their synchronisation signal (z_valid). The
// controller packs one clock's bytes of all co-processors into one 32-bit
// bus word for the main processor and raises a control signal
// (word_valid) while a word waits. With two 2-byte cores the byte lanes are
// Z0 = core 0 first byte on bits 31..24, Z1 = core 0 second byte on 23..16,
// Z2 = core 1 first byte on 15..8 and Z3 = core 1 second byte on 7..0.
//
// The paper gives the lanes (bus bits 24-31, 16-23, 8-15, 0-7 for Z0..Z3)
// and the names of the signals, not how the controller works. This design
// uses a small word FIFO (DEPTH words) with a valid/ready handshake to the
// processor, and asks all cores for a new pair (z_req) only while the FIFO
// has room for every word already requested. With word_ready held high the
// FIFO never fills and a word is requested every clock, i.e. four bytes per
// clock. A pair is accepted by the cores only when all of them are ready
// (prga_ready), so they stay in lockstep; an assertion checks that their
// synchronisation signals always agree.
//
// flush (the start of a new key) empties the FIFO and forgets requests in
// flight, so no word of the old keystream follows a re-key.
//
// Timing: a word requested in clock t is written into the FIFO at the end
// of clock t+1 and is on word/word_valid from clock t+2. Synchronous
// active-low reset empties the FIFO.
module rc4_coproc_if
  import rc4_pkg::*;
#(
  parameter int unsigned NCORES         = 2,
  parameter int unsigned BYTES_PER_CORE = 2,
  parameter int unsigned DEPTH          = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  flush,       // new key: drop words of the old keystream
  // co-processor side
  input  logic  prga_ready [NCORES],
  input  logic  z_valid    [NCORES],
  input  byte_t z          [NCORES][BYTES_PER_CORE],
  output logic  z_req,
  // main processor side
  output logic [8*NCORES*BYTES_PER_CORE-1:0] word,
  output logic  word_valid,
  input  logic  word_ready,
  output logic  overflow     // a word arrived with the FIFO full (never expected)
);

  localparam int unsigned W  = 8 * NCORES * BYTES_PER_CORE;
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   count;
  logic          pending;     // a pair was accepted last clock
  logic          all_ready, push, pop;
  logic [W-1:0]  packed_z;

  always_comb begin
    all_ready = 1'b1;
    for (int c = 0; c < NCORES; c++) all_ready &= prga_ready[c];
    // bytes in order Z0, Z1, .. from the most significant lane down
    for (int c = 0; c < NCORES; c++)
      for (int b = 0; b < BYTES_PER_CORE; b++)
        packed_z[W-1-8*(c*BYTES_PER_CORE+b) -: 8] = z[c][b];
  end

  assign z_req      = all_ready && (32'(count) + 32'(pending) < DEPTH);
  assign push       = z_valid[0];
  assign pop        = word_valid && word_ready;
  assign word_valid = (count != '0);
  assign word       = mem[rd_ptr];
  assign overflow   = push && !pop && (32'(count) == DEPTH);

  always_ff @(posedge clk) begin
    if (!rst_n || flush) begin
      rd_ptr  <= '0;
      wr_ptr  <= '0;
      count   <= '0;
      pending <= 1'b0;
    end else begin
      pending <= z_req;
      if (push && !overflow) begin
        mem[wr_ptr] <= packed_z;
        wr_ptr      <= (32'(wr_ptr) == DEPTH - 1) ? '0 : wr_ptr + 1'b1;
      end
      if (pop) rd_ptr <= (32'(rd_ptr) == DEPTH - 1) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push && !overflow) - (AW+1)'(pop);
    end
  end

  // The co-processors run in lockstep.
  for (genvar c = 1; c < NCORES; c++) begin : g_sync
    a_lockstep : assert property (@(posedge clk) disable iff (!rst_n || flush)
      z_valid[c] == z_valid[0]);
  end
  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n || flush) !overflow);

endmodule
