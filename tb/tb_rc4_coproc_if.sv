// tb_rc4_coproc_if: checks the co-processor interface controller with two
// modelled co-processors. Each model answers a z_req with a byte pair in
// the next clock (its synchronisation signal), drawn from its own counter
// so that order can be checked. The controller's words must carry core 0's
// first byte on bits 31..24, its second on 23..16, core 1's on 15..8 and
// 7..0, in request order, with no loss under random word_ready, and at one
// word per clock when word_ready stays high. Cores not ready must get no
// request served. A flush must drop the queued words.
module tb_rc4_coproc_if;
  import rc4_pkg::*;

  localparam int NC = 2;
  logic clk = 0, rst_n = 0, flush = 0;
  logic prga_ready [NC];
  logic z_valid [NC];
  byte_t z [NC][2];
  logic z_req, word_valid, word_ready = 0, overflow;
  logic [31:0] word;
  int checks = 0, failures = 0;
  byte_t next_b [NC];
  int expected_n = 0, got_n = 0, stalls = 0, full_rate_words = 0;
  logic [31:0] exp_q [$];
  int cyc = 0;

  rc4_coproc_if dut (.*);   // defaults: 2 cores, 2 bytes each, 4 words

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // co-processor models
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int c = 0; c < NC; c++) begin
      if (!rst_n) begin
        z_valid[c] <= 0;
        next_b[c] <= 8'(c * 100);
      end else begin
        z_valid[c] <= z_req && prga_ready[0] && prga_ready[1] && !flush;
        if (z_req && prga_ready[0] && prga_ready[1] && !flush) begin
          z[c][0] <= next_b[c];
          z[c][1] <= next_b[c] + 8'd1;
          next_b[c] <= next_b[c] + 8'd2;
        end
      end
    end
    if (flush) exp_q.delete();
    else if (rst_n && z_req && prga_ready[0] && prga_ready[1])
      exp_q.push_back({next_b[0], next_b[0] + 8'd1, next_b[1], next_b[1] + 8'd1});
  end

  // processor side
  always @(posedge clk) begin
    if (rst_n && word_valid && word_ready) begin
      checks++;
      got_n++;
      if (exp_q.size() == 0 || word !== exp_q[0]) begin
        failures++;
        if (failures < 10) $display("FAIL word %08h exp %08h", word, (exp_q.size() != 0) ? exp_q[0] : 32'h0);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    if (rst_n && word_valid && !word_ready) stalls++;
    if (rst_n) begin
      checks++;
      if (overflow) failures++;
    end
  end

  initial begin
    int w0, c0;
    prga_ready[0] = 0; prga_ready[1] = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // cores not ready: no request
    repeat (5) begin
      @(posedge clk); #1; checks++; if (z_req) failures++;
    end
    prga_ready[0] = 1;
    @(posedge clk); #1; checks++; if (z_req) failures++;
    prga_ready[1] = 1;
    // full rate for 200 clocks
    word_ready = 1;
    repeat (10) @(posedge clk);
    #1 w0 = got_n;
    repeat (200) @(posedge clk);
    #1 full_rate_words = got_n - w0;
    checks++;
    if (full_rate_words != 200) begin
      failures++; $display("FAIL %0d words in 200 clocks", full_rate_words);
    end
    // random back-pressure
    repeat (5000) begin
      word_ready = ($urandom % 3 != 0);
      @(posedge clk); #1;
    end
    // fill the FIFO, then flush: the queued words must disappear
    word_ready = 0;
    repeat (10) @(posedge clk);
    #1 checks++;
    if (!word_valid) failures++;
    flush = 1;
    @(posedge clk); #1 flush = 0;
    checks++;
    if (word_valid) begin failures++; $display("FAIL words left after flush"); end
    word_ready = 1;
    repeat (50) @(posedge clk);
    #1;
    checks++;
    if (stalls == 0) failures++;
    $display("words %0d stalls %0d", got_n, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
