// rc4_ref_pkg: plain software model of RC4 for the testbenches.
//
// rc4_model runs the textbook algorithm one byte at a time: the key
// schedule (S[n] = n, K[n] = key[n mod l], 256 swaps) and then the
// keystream loop (i = i + 1, j = j + S[i], swap, Z = S[S[i] + S[j]]). It
// shares no code with the hardware and is what the hardware is checked
// against.
package rc4_ref_pkg;

  class rc4_model;
    logic [7:0] s [256];
    logic [7:0] i, j;

    function void schedule(input logic [7:0] key [16], input int len);
      logic [7:0] t;
      if (len < 1) len = 1;
      if (len > 16) len = 16;
      for (int n = 0; n < 256; n++) s[n] = 8'(n);
      j = 0;
      for (int n = 0; n < 256; n++) begin
        j = j + s[n] + key[n % len];
        t = s[n]; s[n] = s[j]; s[j] = t;
      end
      i = 0;
      j = 0;
    endfunction

    function logic [7:0] next();
      logic [7:0] t;
      i = i + 1;
      j = j + s[i];
      t = s[i]; s[i] = s[j]; s[j] = t;
      return s[8'(s[i] + s[j])];
    endfunction
  endclass

endpackage
