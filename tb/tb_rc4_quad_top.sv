// tb_rc4_quad_top: end-to-end test of the four-byte-per-clock RC4 system
// at its default size (two co-processors, 32-bit words).
//
// Each session loads two random keys (K0 for co-processor 1, K1 for
// co-processor 2), waits for the key schedules and then takes keystream
// words. The testbench plays the main processor: it XORs each word with
// four plaintext bytes (Z0..Z3 with P[n]..P[n+3]) to get ciphertext, and a
// software RC4 pair plays the receiving side, decrypting with the same two
// keys; the recovered text must equal the plaintext. The words themselves
// are also compared with the software keystreams.
//
// Checked and counted: the key schedule timing (ksa_done in clock 130
// after the start clock), full rate (one 32-bit word every clock while the
// processor is ready), back-pressure stalls, a restart with new keys in the
// middle of a keystream, the PRGA initialisation clock without swap, and
// every one of the seven swap cases of the two-swap controller (the rare
// ones need the long final session). A mechanism that never happened
// counts as a failure.
module tb_rc4_quad_top;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  localparam int NC = 2;
  logic clk = 0, rst_n = 0, start = 0, word_ready = 0;
  byte_t key [NC][KEY_MAX];
  keylen_t key_len [NC];
  logic ksa_done, word_valid, overflow;
  logic [31:0] word;
  logic swap_we [NC];
  logic [2:0] swap_case [NC];
  int checks = 0, failures = 0;
  int cyc = 0;

  // mechanism counters
  longint case_hits [8];
  int n_sessions = 0, n_restarts = 0, n_stalls = 0, n_fullrate = 0, n_init_noswap = 0;
  longint n_words = 0;

  rc4_quad_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      for (int c = 0; c < NC; c++)
        if (swap_we[c]) case_hits[swap_case[c]]++;
      if (word_valid && !word_ready) n_stalls++;
    end
  end

  rc4_model tx [NC];   // reference keystreams (checks the words)
  rc4_model rx [NC];   // receiving side (decrypts the ciphertext)

  task automatic new_session(output int c0);
    for (int c = 0; c < NC; c++) begin
      for (int b = 0; b < KEY_MAX; b++) key[c][b] = 8'($urandom);
      key_len[c] = keylen_t'(5 + $urandom % 12);
    end
    start = 1;
    c0 = cyc;
    @(posedge clk); #1;
    start = 0;
    for (int c = 0; c < NC; c++) begin
      tx[c].schedule(key[c], int'(key_len[c]));
      rx[c].schedule(key[c], int'(key_len[c]));
    end
    n_sessions++;
  endtask

  // Take n words with the given chance (percent) of the processor not
  // being ready; encrypt, decrypt and compare.
  task automatic take_words(input int n, input int stall_pct);
    int got = 0;
    byte_t p [4], ct [4], e [4], d [4];
    while (got < n) begin
      word_ready = ($urandom % 100) >= stall_pct;
      #1;
      if (word_valid && word_ready) begin
        e[0] = tx[0].next(); e[1] = tx[0].next();
        e[2] = tx[1].next(); e[3] = tx[1].next();
        for (int b = 0; b < 4; b++) begin
          p[b]  = 8'($urandom);
          ct[b] = p[b] ^ word[31 - 8*b -: 8];        // main processor XOR
        end
        d[0] = ct[0] ^ rx[0].next(); d[1] = ct[1] ^ rx[0].next();
        d[2] = ct[2] ^ rx[1].next(); d[3] = ct[3] ^ rx[1].next();
        checks += 2;
        if (word !== {e[0], e[1], e[2], e[3]}) begin
          failures++;
          if (failures < 10) $display("FAIL word %08h exp %02h%02h%02h%02h", word, e[0], e[1], e[2], e[3]);
        end
        if ({d[0], d[1], d[2], d[3]} !== {p[0], p[1], p[2], p[3]}) failures++;
        got++;
        n_words++;
      end
      @(posedge clk); #1;
    end
    word_ready = 0;
  endtask

  task automatic wait_ksa(input int c0);
    while (!ksa_done) begin
      @(posedge clk); #1;
    end
    checks++;
    // start clock = clock 1; prga_en latched at the end of clock 129
    if (cyc - c0 + 1 != 130) begin
      failures++; $display("FAIL ksa_done in clock %0d", cyc - c0 + 1);
    end
    checks++;
    if (swap_we[0] || swap_we[1]) failures++;   // PRGA initialisation clock
    else n_init_noswap++;
  endtask

  initial begin
    int c0, w0, c1;
    for (int c = 0; c < NC; c++) begin
      tx[c] = new(); rx[c] = new();
      key_len[c] = 5;
      for (int b = 0; b < KEY_MAX; b++) key[c][b] = 0;
    end
    for (int k = 0; k < 8; k++) case_hits[k] = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;

    // session 1: full rate, check 4 bytes per clock
    new_session(c0);
    wait_ksa(c0);
    take_words(3, 0);          // pipeline filled
    w0 = int'(n_words); c1 = cyc;
    take_words(500, 0);
    checks++;
    if (cyc - c1 != 500) begin
      failures++; $display("FAIL 500 words took %0d clocks", cyc - c1);
    end else n_fullrate++;

    // session 2: back-pressure, then a restart in the middle of the stream
    new_session(c0);
    wait_ksa(c0);
    take_words(2000, 50);
    word_ready = 1;
    repeat (3) @(posedge clk);   // words left unread are dropped by the restart
    #1 word_ready = 0;
    new_session(c0);
    n_restarts++;
    wait_ksa(c0);
    take_words(1000, 10);

    // long session: rare swap cases need about 2^16 clocks each
    new_session(c0);
    wait_ksa(c0);
    take_words(600000, 5);

    for (int k = 1; k <= 7; k++) begin
      checks++;
      $display("swap case %0d: %0d", k, case_hits[k]);
      if (case_hits[k] == 0) failures++;
    end
    $display("sessions %0d restarts %0d stalls %0d full-rate %0d init-noswap %0d words %0d",
             n_sessions, n_restarts, n_stalls, n_fullrate, n_init_noswap, n_words);
    checks += 4;
    if (n_restarts == 0) failures++;
    if (n_stalls == 0) failures++;
    if (n_fullrate == 0) failures++;
    if (n_init_noswap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
