// rc4_dkp2_core: one RC4 co-processor, the 2-byte-per-clock dynamic
// KSA-PRGA ("DKP") architecture.
//
// The same datapath first runs the key schedule (KSA) and is then turned
// into the keystream generator (PRGA) by one signal, prga_en: it forces the
// key terms of the j adders to zero and lets the keystream generator work.
// Each clock executes two RC4 iterations: the i counter gives i1 and
// i2 = i1 + 1, the j generator gives j1 and j2, the storage block reads the
// four S-box entries at i1, i2, j1, j2, and the swap controller writes the
// result of both swaps back at the same edge.
//
// Clock schedule after start (start is sampled at a rising edge):
//   clock 1        initialisation: S[n] = n, K[n] = key[n mod l], i = j = 0
//   clocks 2..129  KSA, pairs (0,1) .. (254,255), 128 clocks
//   clock 130      PRGA initialisation: i = j = 0, no swap, prga_en high
//   then           one PRGA clock per z_req, pairs (1,2),(3,4),..,(255,0),..
// The keystream pair of a PRGA clock comes out in the next clock (z_valid),
// so n bytes take n/2 + 2 clocks from the PRGA initialisation clock on and
// 129 + 2 + n/2 clocks from the initialisation clock, as in the paper.
//
// The clock schedule follows the paper. z_req is this design's own
// addition: a PRGA clock only happens while z_req is high, so the bus side
// can stall the generator (the paper's processor "holds until the key
// stream is acknowledged"). prga_ready is high once PRGA clocks can be
// requested. start at any time restarts with a new key. Reset is
// synchronous and active low.
//
// Single edge: the paper reads on the falling and writes on the rising
// edge; here reads are combinational and all registers use the rising edge.
module rc4_dkp2_core
  import rc4_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  byte_t   key [KEY_MAX],
  input  keylen_t key_len,
  input  logic    z_req,        // request one PRGA clock (2 bytes)
  output logic    prga_ready,   // in PRGA; z_req is served
  output logic    prga_en,
  output byte_t   z1,           // first keystream byte of the pair
  output byte_t   z2,           // second keystream byte of the pair
  output logic    z_valid,      // synchronisation signal: z1/z2 valid
  output logic    swap_we,      // S-box written this clock (for coverage)
  output logic [2:0] swap_case  // swap controller case 1..7 (for coverage)
);

  phase_e phase;
  byte_t  j0;

  // counter control
  logic  cnt_clear, cnt_step1, cnt_step2, last_ksa;
  byte_t i1, i2;

  // datapath
  byte_t j1, j2;
  byte_t s_ai   [2];
  byte_t s_aj   [2];
  byte_t s_ri   [2];
  byte_t s_rj   [2];
  byte_t s_wr   [4];
  byte_t s_q    [N];
  byte_t k_addr [2];
  byte_t k_rd   [2];
  logic  s_init, k_load, step;

  // ---- control ----
  always_comb begin
    s_init    = start;
    k_load    = start;
    step      = 1'b0;
    swap_we   = 1'b0;
    cnt_clear = start;
    cnt_step1 = 1'b0;
    cnt_step2 = 1'b0;
    if (!start) begin
      unique case (phase)
        PH_KSA: begin
          swap_we   = 1'b1;
          cnt_step2 = !last_ksa;
          cnt_clear = last_ksa;
        end
        PH_PRGA_INIT: begin
          cnt_step1 = 1'b1;
        end
        PH_PRGA: begin
          step      = z_req;
          swap_we   = z_req;
          cnt_step2 = z_req;
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase   <= PH_IDLE;
      j0      <= '0;
      prga_en <= 1'b0;
    end else if (start) begin
      phase   <= PH_KSA;
      j0      <= '0;
      prga_en <= 1'b0;
    end else begin
      unique case (phase)
        PH_KSA: begin
          j0 <= j2;
          if (last_ksa) begin
            phase   <= PH_PRGA_INIT;
            prga_en <= 1'b1;          // latched high for the rest of the run
          end
        end
        PH_PRGA_INIT: begin
          j0    <= '0;
          phase <= PH_PRGA;
        end
        PH_PRGA: begin
          if (z_req) j0 <= j2;
        end
        default: ;
      endcase
    end
  end

  assign prga_ready = (phase == PH_PRGA);

  // ---- blocks ----
  rc4_i_counter u_cnt (
    .clk, .rst_n,
    .clear(cnt_clear), .step1(cnt_step1), .step2(cnt_step2),
    .i1, .i2, .last_ksa
  );

  assign k_addr[0] = i1;
  assign k_addr[1] = i2;

  rc4_key_array u_key (
    .clk, .load(k_load), .key, .key_len,
    .raddr(k_addr), .rdata(k_rd)
  );

  assign s_ai[0] = i1;
  assign s_ai[1] = i2;
  assign s_aj[0] = j1;
  assign s_aj[1] = j2;

  rc4_sbox_storage u_sbox (
    .clk, .rst_n, .init(s_init), .we(swap_we),
    .addr_i(s_ai), .addr_j(s_aj), .rdata_i(s_ri), .rdata_j(s_rj), .wdata(s_wr), .s_q
  );

  rc4_j_gen u_jgen (
    .prga_en, .j0, .i2,
    .s_i1(s_ri[0]), .s_i2(s_ri[1]), .k_i1(k_rd[0]), .k_i2(k_rd[1]),
    .j1, .j2
  );

  rc4_swap_ctrl u_swap (
    .i1, .i2, .j1, .j2,
    .s_i1(s_ri[0]), .s_i2(s_ri[1]), .s_j1(s_rj[0]), .s_j2(s_rj[1]),
    .w_i1(s_wr[0]), .w_i2(s_wr[1]), .w_j1(s_wr[2]), .w_j2(s_wr[3]),
    .swap_case
  );

  rc4_z_gen u_zgen (
    .clk, .rst_n, .step,
    .i1, .i2, .j1, .j2,
    .s_i1(s_ri[0]), .s_i2(s_ri[1]), .s_j1(s_rj[0]), .s_j2(s_rj[1]),
    .s_q, .z1, .z2, .z_valid
  );

  // Keystream only leaves the core after the key schedule, and the S-box
  // is never written in the PRGA initialisation clock.
  a_z_after_ksa : assert property (@(posedge clk) disable iff (!rst_n)
    z_valid |-> prga_en);
  a_no_swap_init : assert property (@(posedge clk) disable iff (!rst_n)
    (phase == PH_PRGA_INIT && !start) |-> !swap_we);

endmodule
