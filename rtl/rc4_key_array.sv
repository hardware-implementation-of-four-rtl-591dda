// rc4_key_array: the K[256] array of RC4 and its read MUX.
//
// At the KSA initialisation clock (load) the array is filled with the
// secret key repeated over 256 entries, K[n] = key[n mod l] (line 4 of the
// RC4 key schedule). During KSA two entries, K[i1] and K[i2], are read per
// clock through a 256:1 MUX per port.
//
// The paper states only that the l key bytes are stored in the K[256]
// array. How the key reaches the array is this design's choice: the key
// bytes and the length arrive in parallel on ports, and the repetition is
// computed by a running index instead of 256 modulo circuits. A key_len of
// 0 behaves as 1 and one above KEY_MAX as KEY_MAX.
//
// Timing: K is registered and loaded at the rising edge with load high; the
// reads are combinational.
module rc4_key_array
  import rc4_pkg::*;
(
  input  logic    clk,
  input  logic    load,
  input  byte_t   key [KEY_MAX],
  input  keylen_t key_len,
  input  byte_t   raddr [2],     // i1, i2
  output byte_t   rdata [2]      // K[i1], K[i2]
);

  byte_t k [N];
  byte_t k_next [N];
  keylen_t len_eff;

  always_comb begin
    keylen_t idx;
    if (key_len == '0)                    len_eff = keylen_t'(1);
    else if (key_len > keylen_t'(KEY_MAX)) len_eff = keylen_t'(KEY_MAX);
    else                                   len_eff = key_len;
    idx = '0;
    for (int n = 0; n < N; n++) begin
      k_next[n] = key[idx[3:0]];
      idx = (idx + keylen_t'(1) >= len_eff) ? '0 : idx + keylen_t'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (load) k <= k_next;
  end

  always_comb begin
    for (int p = 0; p < 2; p++) rdata[p] = k[raddr[p]];
  end

endmodule
