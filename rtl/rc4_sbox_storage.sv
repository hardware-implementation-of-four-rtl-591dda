// rc4_sbox_storage: the storage block of the 2-byte-per-clock RC4 core.
//
// A register bank of 256 bytes holds the S-box. A quad-selecting input MUX
// reads the four entries S[i1], S[i2], S[j1], S[j2] at once, and a
// quad-selecting input DEMUX writes four bytes back to the same four
// addresses at the rising clock edge; the swap controller decides which
// byte goes to which address. The i and j read ports are separate groups
// because j1/j2 are computed from S[i1]/S[i2]. The whole bank is also brought out (s_q) so
// that the keystream generator can read it through its own 256:2 MUX.
//
// When two write addresses coincide the swap controller hands them the same
// byte, so the order in which the DEMUX ports are applied does not matter;
// an assertion checks this rule.
//
// The paper reads the bank on the falling clock edge into D flip-flops and
// writes on the next rising edge. Here the reads are combinational from the
// bank and the write is on the rising edge, which gives the same one-clock
// read-modify-write with a single clock edge. init loads the identity
// permutation S[n] = n in one clock (the KSA initialisation clock); it has
// priority over we. Reset also loads the identity (reset is not specified
// by the paper).
module rc4_sbox_storage
  import rc4_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  init,             // S[n] <= n for all n
  input  logic  we,               // write the four DEMUX ports
  input  byte_t addr_i [2],       // i1, i2
  input  byte_t addr_j [2],       // j1, j2
  output byte_t rdata_i [2],      // S[i1], S[i2]
  output byte_t rdata_j [2],      // S[j1], S[j2]
  input  byte_t wdata [4],        // new S[i1], S[i2], S[j1], S[j2]
  output byte_t s_q [N]           // the whole bank
);

  byte_t s [N];
  byte_t addr [4];                // DEMUX addresses i1, i2, j1, j2

  assign addr[0] = addr_i[0];
  assign addr[1] = addr_i[1];
  assign addr[2] = addr_j[0];
  assign addr[3] = addr_j[1];

  always_ff @(posedge clk) begin
    for (int n = 0; n < N; n++) begin
      if (!rst_n || init) begin
        s[n] <= byte_t'(n);
      end else if (we) begin
        for (int p = 0; p < 4; p++)
          if (addr[p] == byte_t'(n)) s[n] <= wdata[p];
      end
    end
  end

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      rdata_i[p] = s[addr_i[p]];
      rdata_j[p] = s[addr_j[p]];
    end
  end

  assign s_q = s;

  // Two DEMUX ports that hit the same register must carry the same byte.
  for (genvar a = 0; a < 4; a++) begin : g_chk_a
    for (genvar b = a + 1; b < 4; b++) begin : g_chk_b
      a_same_data : assert property (@(posedge clk) disable iff (!rst_n)
        (we && !init && addr[a] == addr[b]) |-> (wdata[a] == wdata[b]));
    end
  end

endmodule
