// tb_rc4_z_gen: checks the Z1/Z2 generator. A random permutation S0 and
// index set (equalities forced often) are applied in a step clock; in the
// next clock the bank input carries S2 (both swaps done), and z1 must equal
// S1[S0[i1] + S0[j1]] and z2 must equal S2[S1[i2] + S1[j2]], computed by
// plain sequential swaps. z_valid must be high exactly one clock after a
// step.
module tb_rc4_z_gen;
  import rc4_pkg::*;

  logic clk = 0, rst_n = 0, step = 0;
  byte_t i1, i2, j1, j2, s_i1, s_i2, s_j1, s_j2, z1, z2;
  byte_t s_q [N];
  logic z_valid;
  int checks = 0, failures = 0;

  rc4_z_gen dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte_t s0 [N], s1 [N], s2 [N];
    byte_t t, ez1, ez2;
    int r;
    i1 = 0; i2 = 1; j1 = 0; j2 = 0; s_i1 = 0; s_i2 = 0; s_j1 = 0; s_j2 = 0;
    for (int n = 0; n < N; n++) s_q[n] = 0;
    @(posedge clk); #1 rst_n = 1;
    for (int it = 0; it < 10000; it++) begin
      for (int n = 0; n < N; n++) s0[n] = 8'(n);
      for (int n = N - 1; n > 0; n--) begin
        r = $urandom % (n + 1); t = s0[n]; s0[n] = s0[r]; s0[r] = t;
      end
      i1 = 8'($urandom); i2 = i1 + 8'd1;
      j1 = 8'($urandom); j2 = 8'($urandom);
      case ($urandom % 8)
        0: j1 = i2;
        1: j2 = i1;
        2: j2 = j1;
        3: begin j1 = i2; j2 = i1; end
        4: begin j1 = i2; j2 = i2; end
        5: begin j1 = i1; j2 = i1; end
        default: ;
      endcase
      s1 = s0;
      t = s1[i1]; s1[i1] = s1[j1]; s1[j1] = t;
      s2 = s1;
      t = s2[i2]; s2[i2] = s2[j2]; s2[j2] = t;
      ez1 = s1[8'(s1[i1] + s1[j1])];
      ez2 = s2[8'(s2[i2] + s2[j2])];
      s_i1 = s0[i1]; s_i2 = s0[i2]; s_j1 = s0[j1]; s_j2 = s0[j2];
      s_q = s0;
      step = 1;
      @(posedge clk); #1;
      step = 0;
      s_q = s2;
      i1 = 8'($urandom); j1 = 8'($urandom);   // stage B must not depend on these
      i2 = 8'($urandom); j2 = 8'($urandom);
      #1;
      checks += 3;
      if (!z_valid) failures++;
      if (z1 !== ez1) begin failures++; if (failures < 10) $display("FAIL z1=%0h exp %0h", z1, ez1); end
      if (z2 !== ez2) begin failures++; if (failures < 10) $display("FAIL z2=%0h exp %0h", z2, ez2); end
      if ($urandom % 4 == 0) begin
        @(posedge clk); #1;
        checks++;
        if (z_valid) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
