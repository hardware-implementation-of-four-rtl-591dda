// tb_rc4_j_gen: checks the unrolled j1/j2 generator. For random inputs
// (with i2 == j1 forced often) j1 and j2 are compared with two plain RC4
// iterations on an S-box model: j1 = j0 + S0[i1] + K[i1], first swap,
// j2 = j1 + S1[i2] + K[i2], with the K terms zero when prga_en is high.
module tb_rc4_j_gen;
  import rc4_pkg::*;

  logic  prga_en;
  byte_t j0, i2, s_i1, s_i2, k_i1, k_i2, j1, j2;
  int checks = 0, failures = 0, hits_eq = 0;

  rc4_j_gen dut (.*);

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte_t s [N];
    byte_t i1, ej1, ej2, t;
    for (int it = 0; it < 20000; it++) begin
      for (int n = 0; n < N; n++) s[n] = 8'($urandom);
      i1 = 8'($urandom);
      i2 = i1 + 8'd1;
      prga_en = $urandom % 2;
      k_i1 = 8'($urandom); k_i2 = 8'($urandom);
      j0 = 8'($urandom);
      if (it % 3 == 0) begin      // make j1 land on i2
        s[i1] = i2 - j0 - (prga_en ? 8'd0 : k_i1);
      end
      s_i1 = s[i1]; s_i2 = s[i2];
      // reference: two sequential iterations
      ej1 = j0 + s[i1] + (prga_en ? 8'd0 : k_i1);
      t = s[i1]; s[i1] = s[ej1]; s[ej1] = t;
      ej2 = ej1 + s[i2] + (prga_en ? 8'd0 : k_i2);
      if (ej1 == i2) hits_eq++;
      #1;
      checks += 2;
      if (j1 !== ej1) failures++;
      if (j2 !== ej2) begin
        failures++;
        if (failures < 10) $display("FAIL j2=%0d exp %0d (j1=%0d i2=%0d)", j2, ej2, ej1, i2);
      end
    end
    checks++;
    if (hits_eq == 0) failures++;
    $display("i2==j1 cases: %0d", hits_eq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
