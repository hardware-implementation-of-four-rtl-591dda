// tb_rc4_sbox_storage: checks the 256-byte register bank with its quad
// read MUX and quad write DEMUX against an array model. After reset and
// after init the bank must hold S[n] = n. Random four-address writes (with
// coinciding addresses given equal data, as the swap controller does) are
// applied and every read port and the whole bank are compared.
module tb_rc4_sbox_storage;
  import rc4_pkg::*;

  logic clk = 0, rst_n = 0, init = 0, we = 0;
  byte_t addr_i [2], addr_j [2], rdata_i [2], rdata_j [2], wdata [4];
  byte_t s_q [N];
  byte_t model [N];
  int checks = 0, failures = 0;

  rc4_sbox_storage dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int n = 0; n < N; n++) begin
      checks++;
      if (s_q[n] !== model[n]) begin
        failures++;
        if (failures < 10) $display("FAIL S[%0d]=%0d model %0d", n, s_q[n], model[n]);
      end
    end
    for (int p = 0; p < 2; p++) begin
      checks += 2;
      if (rdata_i[p] !== model[addr_i[p]]) failures++;
      if (rdata_j[p] !== model[addr_j[p]]) failures++;
    end
  endtask

  initial begin
    byte_t a [4];
    byte_t vals [N];
    for (int p = 0; p < 2; p++) begin addr_i[p] = 0; addr_j[p] = 0; end
    for (int p = 0; p < 4; p++) wdata[p] = 0;
    @(posedge clk); #1 rst_n = 1;
    for (int n = 0; n < N; n++) model[n] = 8'(n);
    check_all();
    for (int it = 0; it < 2000; it++) begin
      for (int n = 0; n < N; n++) vals[n] = 8'($urandom);
      for (int p = 0; p < 4; p++) begin
        a[p] = ($urandom % 4 == 0 && p > 0) ? a[$urandom % p] : 8'($urandom);
        wdata[p] = vals[a[p]];
      end
      addr_i[0] = a[0]; addr_i[1] = a[1]; addr_j[0] = a[2]; addr_j[1] = a[3];
      we = ($urandom % 8 != 0);
      init = (it % 500 == 499);
      #1 check_all();         // combinational reads before the edge
      @(posedge clk);
      if (init) for (int n = 0; n < N; n++) model[n] = 8'(n);
      else if (we) for (int p = 0; p < 4; p++) model[a[p]] = wdata[p];
      #1 check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
