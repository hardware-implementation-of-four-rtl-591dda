// rc4_swap_ctrl: swap controlling block of the 2-byte-per-clock RC4 core.
//
// Two successive swaps, S[i1]<->S[j1] then S[i2]<->S[j2], are replaced by
// one register-to-register move over the four addresses i1, i2, j1, j2.
// Since i2 = i1 + 1, only three equalities matter, each found by an 8-bit
// comparator: c1 = (i2 == j1), c2 = (j2 == i1), c3 = (j2 == j1). The seven
// possible cases and their data movements are the paper's table of swap
// cases; the eighth combination (all three equal) cannot happen.
//
// The outputs are the bytes to be written at addresses i1, i2, j1, j2 by the
// storage block's DEMUX. Where two of those addresses coincide, both ports
// carry the same byte, which is the final value of that register, so the
// write order inside the storage block is irrelevant. The case where
// i1 == j1 is not listed separately in the paper; it falls into case 1 or
// case 4 of the table and those rows give the right result for it.
//
// Purely combinational; swap_case (1..7) is given out for coverage.
module rc4_swap_ctrl
  import rc4_pkg::*;
(
  input  byte_t       i1,
  input  byte_t       i2,
  input  byte_t       j1,
  input  byte_t       j2,
  input  byte_t       s_i1,     // S0[i1]
  input  byte_t       s_i2,     // S0[i2]
  input  byte_t       s_j1,     // S0[j1]
  input  byte_t       s_j2,     // S0[j2]
  output byte_t       w_i1,     // new S[i1]
  output byte_t       w_i2,     // new S[i2]
  output byte_t       w_j1,     // new S[j1]
  output byte_t       w_j2,     // new S[j2]
  output logic  [2:0] swap_case
);

  logic c1, c2, c3;

  always_comb begin
    c1 = (i2 == j1);
    c2 = (j2 == i1);
    c3 = (j2 == j1);
    unique case ({c1, c2, c3})
      3'b000: begin  // case 1: two independent swaps
        w_i1 = s_j1;  w_j1 = s_i1;  w_i2 = s_j2;  w_j2 = s_i2;  swap_case = 3'd1;
      end
      3'b001: begin  // case 2: j2 = j1; S[i1]->i2, S[i2]->j1=j2, S[j1]->i1
        w_i2 = s_i1;  w_j1 = s_i2;  w_j2 = s_i2;  w_i1 = s_j1;  swap_case = 3'd2;
      end
      3'b010: begin  // case 3: j2 = i1; S[i1]->j1, S[i2]->i1=j2, S[j1]->i2
        w_j1 = s_i1;  w_i1 = s_i2;  w_j2 = s_i2;  w_i2 = s_j1;  swap_case = 3'd3;
      end
      3'b011: begin  // case 4: i1 = j1 = j2; S[i1]->i2, S[i2]->i1=j1=j2
        w_i2 = s_i1;  w_i1 = s_i2;  w_j1 = s_i2;  w_j2 = s_i2;  swap_case = 3'd4;
      end
      3'b100: begin  // case 5: i2 = j1; S[i1]->j2, S[j2]->j1=i2, S[j1]->i1
        w_j2 = s_i1;  w_j1 = s_j2;  w_i2 = s_j2;  w_i1 = s_j1;  swap_case = 3'd5;
      end
      3'b101: begin  // case 6: i2 = j1 = j2; S[i1]->j1=i2=j2, S[j1]->i1
        w_j1 = s_i1;  w_i2 = s_i1;  w_j2 = s_i1;  w_i1 = s_j1;  swap_case = 3'd6;
      end
      default: begin // case 7: i2 = j1, j2 = i1: the swaps cancel (111 cannot occur)
        w_i1 = s_i1;  w_i2 = s_i2;  w_j1 = s_j1;  w_j2 = s_j2;  swap_case = 3'd7;
      end
    endcase
  end

endmodule
