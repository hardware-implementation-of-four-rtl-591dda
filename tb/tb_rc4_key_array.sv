// tb_rc4_key_array: loads random keys of every length 0..20 and checks all
// 256 entries K[n] = key[n mod l] through the two read ports (length 0 acts
// as 1, lengths above 16 as 16). Also checks that K holds while load is low.
module tb_rc4_key_array;
  import rc4_pkg::*;

  logic clk = 0, load = 0;
  byte_t key [KEY_MAX];
  keylen_t key_len;
  byte_t raddr [2], rdata [2];
  byte_t keep [KEY_MAX];
  int checks = 0, failures = 0;

  rc4_key_array dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int l;
    for (int rep = 0; rep < 3; rep++)
    for (int len = 0; len <= 20; len++) begin
      for (int b = 0; b < KEY_MAX; b++) key[b] = 8'($urandom);
      key_len = keylen_t'(len);
      load = 1;
      @(posedge clk); #1;
      load = 0;
      keep = key;
      for (int b = 0; b < KEY_MAX; b++) key[b] = 8'($urandom);   // must not matter now
      l = (len == 0) ? 1 : (len > 16 ? 16 : len);
      for (int n = 0; n < N; n += 2) begin
        raddr[0] = 8'(n); raddr[1] = 8'(255 - n);
        #1;
        checks += 2;
        if (rdata[0] !== keep[n % l]) begin
          failures++; $display("FAIL len=%0d K[%0d]=%0h exp %0h", len, n, rdata[0], keep[n % l]);
        end
        if (rdata[1] !== keep[(255 - n) % l]) failures++;
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
