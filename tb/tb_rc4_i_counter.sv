// tb_rc4_i_counter: checks the dual MOD-256 i counter against a model.
// Drives random clear/step1/step2 patterns and the full KSA-then-PRGA
// sequence, and compares i1, i2 = i1 + 1 and the last-KSA flag every clock.
module tb_rc4_i_counter;
  import rc4_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, step1 = 0, step2 = 0;
  byte_t i1, i2;
  logic last_ksa;
  int checks = 0, failures = 0;
  int model = 0;
  int lasts = 0;

  rc4_i_counter dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    checks++;
    if (i1 !== 8'(model) || i2 !== 8'(model + 1) || last_ksa !== (model == 254)) begin
      failures++;
      $display("FAIL i1=%0d i2=%0d last=%0b model=%0d", i1, i2, last_ksa, model);
    end
    if (last_ksa) lasts++;
  endtask

  task automatic tick(input logic c, s1, s2);
    clear = c; step1 = s1; step2 = s2;
    @(posedge clk);
    if (c) model = 0;
    else if (s1) model = (model + 1) % 256;
    else if (s2) model = (model + 2) % 256;
    #1 check();
  endtask

  initial begin
    @(posedge clk); #1 rst_n = 1;
    model = 0; check();
    // KSA: 0,2,..,254 then clear
    tick(1, 0, 0);
    for (int k = 0; k < 127; k++) tick(0, 0, 1);
    if (!last_ksa) begin failures++; $display("FAIL no last_ksa at 254"); end
    tick(1, 0, 0);           // PRGA initialisation clock: i = 0
    tick(0, 1, 0);           // i1 = 1
    for (int k = 0; k < 300; k++) begin
      tick(0, 0, 1);
      if (i1[0] !== 1'b1) begin failures++; $display("FAIL PRGA i1 even"); end
    end
    // random control
    for (int k = 0; k < 3000; k++)
      tick(($urandom % 50) == 0, ($urandom % 4) == 0, $urandom % 2);
    checks++;
    if (lasts == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
