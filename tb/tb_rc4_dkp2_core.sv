// tb_rc4_dkp2_core: end-to-end check of one 2-byte-per-clock dynamic
// KSA-PRGA core.
//  * Published RC4 vectors: key "Key", "Wiki", "Secret".
//  * Random keys of length 1..16 against the software model, with z_req
//    held high (full rate) and with random stalls.
//  * Timing: with z_req high from the start, the k-th keystream pair must be
//    valid in clock 131 + k counted from the start clock as clock 1, so n
//    bytes take 129 + 2 + n/2 clocks; the KSA takes 1 + 128 clocks.
//  * A restart in the middle of the keystream re-keys the core.
module tb_rc4_dkp2_core;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, z_req = 0;
  byte_t key [KEY_MAX];
  keylen_t key_len;
  logic prga_ready, prga_en, z_valid, swap_we;
  byte_t z1, z2;
  logic [2:0] swap_case;
  int checks = 0, failures = 0;
  int cyc = 0;

  rc4_dkp2_core dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rc4_model ref_m = new();

  // Start the core with key k (len l) at the next edge; returns the cycle
  // number of the start clock.
  task automatic do_start(input byte_t k [KEY_MAX], input int l, output int c0);
    key = k; key_len = keylen_t'(l);
    start = 1;
    c0 = cyc + 1;           // the clock that ends with the next edge
    @(posedge clk); #1;
    start = 0;
    ref_m.schedule(k, l);
  endtask

  // Collect n pairs; stall_pct = chance in percent of z_req low per clock.
  task automatic run_pairs(input int n, input int stall_pct, input int c0, input bit check_time);
    int got = 0;
    byte_t e1, e2;
    while (got < n) begin
      z_req = ($urandom % 100) >= stall_pct;
      #1;
      if (z_valid) begin
        e1 = ref_m.next(); e2 = ref_m.next();
        checks += 2;
        if (z1 !== e1 || z2 !== e2) begin
          failures++;
          if (failures < 10) $display("FAIL pair %0d: %0h %0h exp %0h %0h", got, z1, z2, e1, e2);
        end
        got++;
        if (check_time) begin
          checks++;
          if (cyc + 1 - c0 + 1 != 131 + got) begin
            failures++;
            $display("FAIL pair %0d in clock %0d, expected %0d", got, cyc + 1 - c0 + 1, 131 + got);
          end
        end
      end
      @(posedge clk); #1;
    end
    z_req = 0;
    // drain a pair that may still be in flight
    #1 if (z_valid) begin void'(ref_m.next()); void'(ref_m.next()); end
  endtask

  task automatic wait_ready(input int c0, input bit check_time);
    while (!prga_ready) begin
      @(posedge clk); #1;
    end
    if (check_time) begin
      checks++;
      // prga_ready is high from clock 131 (1 init + 128 KSA + 1 PRGA init)
      if (cyc + 1 - c0 + 1 != 131) begin
        failures++; $display("FAIL PRGA reached in clock %0d", cyc + 1 - c0 + 1);
      end
    end
  endtask

  task automatic vector(input string ks, input byte_t exp [10], input int ne);
    byte_t k [KEY_MAX];
    int c0;
    byte_t got [$];
    for (int b = 0; b < KEY_MAX; b++) k[b] = (b < ks.len()) ? ks[b] : 8'h00;
    do_start(k, ks.len(), c0);
    wait_ready(c0, 0);
    z_req = 1;
    while (got.size() < ne) begin
      #1 if (z_valid) begin got.push_back(z1); got.push_back(z2); end
      @(posedge clk); #1;
    end
    z_req = 0;
    for (int b = 0; b < ne; b++) begin
      checks++;
      if (got[b] !== exp[b]) begin
        failures++; $display("FAIL key %s byte %0d: %0h exp %0h", ks, b, got[b], exp[b]);
      end
    end
  endtask

  initial begin
    byte_t k [KEY_MAX];
    int c0;
    key_len = 5;
    for (int b = 0; b < KEY_MAX; b++) key[b] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // published test vectors
    vector("Key",    '{8'hEB, 8'h9F, 8'h77, 8'h81, 8'hB7, 8'h34, 8'hCA, 8'h72, 8'hA7, 8'h19}, 10);
    vector("Wiki",   '{8'h60, 8'h44, 8'hDB, 8'h6D, 8'h41, 8'hB7, 8'h00, 8'h00, 8'h00, 8'h00}, 6);
    vector("Secret", '{8'h04, 8'hD4, 8'h6B, 8'h05, 8'h3C, 8'hA8, 8'h7B, 8'h59, 8'h00, 8'h00}, 8);
    // full-rate runs with timing check (z_req high from the start clock)
    for (int r = 0; r < 6; r++) begin
      for (int b = 0; b < KEY_MAX; b++) k[b] = 8'($urandom);
      z_req = 1;
      do_start(k, 1 + $urandom % 16, c0);
      run_pairs(300, 0, c0, 1);
    end
    // stalled runs and restarts in the middle of the keystream
    for (int r = 0; r < 6; r++) begin
      for (int b = 0; b < KEY_MAX; b++) k[b] = 8'($urandom);
      do_start(k, 1 + $urandom % 16, c0);
      wait_ready(c0, 1);
      run_pairs(200 + $urandom % 200, 40, c0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
