// tb_rc4_swap_ctrl: checks the one-step replacement of two swaps. For
// random S-boxes and index sets (with the equalities i2 == j1, j2 == i1,
// j2 == j1 and i1 == j1 forced often) the four output bytes must equal
// the S-box after swap(i1,j1) then swap(i2,j2) at i1, i2, j1, j2. Each of
// the seven cases must be hit and be reported with the right case number.
module tb_rc4_swap_ctrl;
  import rc4_pkg::*;

  byte_t i1, i2, j1, j2, s_i1, s_i2, s_j1, s_j2, w_i1, w_i2, w_j1, w_j2;
  logic [2:0] swap_case;
  int checks = 0, failures = 0;
  int hits [8];

  rc4_swap_ctrl dut (.*);

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte_t s [N];
    byte_t t;
    int ecase;
    for (int c = 0; c < 8; c++) hits[c] = 0;
    for (int it = 0; it < 20000; it++) begin
      for (int n = 0; n < N; n++) s[n] = 8'($urandom);
      i1 = 8'($urandom); i2 = i1 + 8'd1;
      j1 = 8'($urandom); j2 = 8'($urandom);
      case ($urandom % 8)
        0: j1 = i2;
        1: j2 = i1;
        2: j2 = j1;
        3: begin j1 = i2; j2 = i1; end
        4: begin j1 = i2; j2 = i2; end
        5: begin j1 = i1; j2 = i1; end
        6: j1 = i1;
        default: ;
      endcase
      s_i1 = s[i1]; s_i2 = s[i2]; s_j1 = s[j1]; s_j2 = s[j2];
      ecase = 1 + {(i2 == j1), (j2 == i1), (j2 == j1)};
      t = s[i1]; s[i1] = s[j1]; s[j1] = t;
      t = s[i2]; s[i2] = s[j2]; s[j2] = t;
      #1;
      checks += 5;
      if (w_i1 !== s[i1]) failures++;
      if (w_i2 !== s[i2]) failures++;
      if (w_j1 !== s[j1]) failures++;
      if (w_j2 !== s[j2]) failures++;
      if (int'(swap_case) != ecase) failures++;
      if (ecase <= 7) hits[ecase]++;
    end
    for (int c = 1; c <= 7; c++) begin
      checks++;
      if (hits[c] == 0) begin failures++; $display("FAIL case %0d never hit", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
