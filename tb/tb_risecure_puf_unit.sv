// tb_risecure_puf_unit -- end-to-end test of the PUF unit at its default
// parameters. It issues instruction words as a core would and checks:
//  * weak-PUF key: inner_puf_init at challenge 0, then outer_puf_chal E=01
//    returns exactly the random number r given at enrollment; the helper data
//    is the BCH codeword of r offset by the PUF response (checked against a
//    strong-mode read within the noise bound);
//  * hashed responses: a batch of 16 outer_puf_chal E=10 with different outer
//    challenges returns the first 8 bytes of SHA3-256(r || C) from a
//    reference model; the first sample misses the lookaside buffer, the rest
//    hit with a fixed latency of 27 clocks (1 clock for an E=01 hit);
//  * strong-PUF reads (E=00) are noisy but within two flips per codeword;
//  * FIFO eviction after more than 8 distinct entries, decode failures, and
//    illegal words all answer with the documented result;
//  * the result is held while the core stalls the response.
// Each mechanism is counted, and one that never happens counts as a failure.
module tb_risecure_puf_unit;
  import puf_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            req_valid = 0, req_ready, rsp_valid, rsp_ready = 1, rsp_err;
  logic [31:0]     req_instr;
  logic [XLEN-1:0] req_rs1, req_rs2, rsp_rd;
  logic [KW-1:0]   rnd;

  risecure_puf_unit dut (.clk, .rst_n, .req_valid, .req_ready, .req_instr, .req_rs1, .req_rs2,
                         .rnd, .rsp_valid, .rsp_ready, .rsp_rd, .rsp_err);

  localparam logic [31:0] I_INIT = 32'b0000000_00000_00101_001_01010_0101011; // inner_puf_init x10, x5
  localparam logic [31:0] I_CHAL = 32'b0000000_00110_00101_010_01010_0101011; // outer_puf_chal x10, x5, x6

  int checks = 0, failures = 0;
  int dec_cycles;   // clocks the ECC decoder was busy
  int m_init, m_strong, m_weak, m_hash, m_hit, m_miss, m_evict, m_correct, m_fail, m_illegal, m_stall;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] rs1_of(input logic [1:0] e, input int idx, input logic [31:0] c);
    return {e, 22'd0, 8'(idx), c};
  endfunction

  // issue one instruction; stall the response for 'hold' cycles
  task automatic issue(input logic [31:0] ins, input logic [63:0] a, input logic [63:0] b,
                       input logic [KW-1:0] r, output logic [63:0] rd, output bit err,
                       output int cyc, input int hold = 0);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_instr = ins; req_rs1 = a; req_rs2 = b; rnd = r;
    @(negedge clk);
    req_valid = 0; rnd = $urandom;
    cyc = 0;   // clock edges since the accept edge
    if (hold > 0) rsp_ready = 0;
    while (!rsp_valid) begin @(negedge clk); cyc++; end
    rd = rsp_rd; err = rsp_err;
    if (hold > 0) begin
      repeat (hold) @(negedge clk);
      check(rsp_valid && rsp_rd == rd && rsp_err == err, "result held while stalled");
      m_stall++;
      rsp_ready = 1;
    end
  endtask

  // event monitors on the datapath
  always @(posedge clk) if (rst_n) begin
    if (dut.st.name() == "S_LOOKUP") begin if (dut.lb_hit) m_hit++; else m_miss++; end
    if (dut.g_bch.u_ecc.st.name() == "D_SEARCH" && dut.g_bch.u_ecc.cand == dut.g_bch.u_ecc.syn_q) m_correct++;
    if (dut.dec_busy) dec_cycles++;
  end

  function automatic bit near_codewords(input logic [RW-1:0] v, input logic [KW-1:0] r, input int maxd);
    for (int b = 0; b < NBLK; b++)
      if ($countones(v[b*15 +: 15] ^ bch_cw(r[b*7 +: 7])) > maxd) return 0;
    return 1;
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] rd, aux_a, aux_b, r1a, r1b;
    logic [KW-1:0] ra, rb;
    bit err;
    int cyc;
    logic [KW-1:0] rk [10];
    logic [63:0]   auxk [10];

    check(sha3_256_first8({<<8{64'h0102030405060708}}) == {<<8{64'hc9ffb8f9d7ebc1ad}},
          "reference SHA3 model");
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. weak PUF key generation on PUF 0 ----
    ra = 28'h5A3_C96E;
    issue(I_INIT, rs1_of(2'b00, 0, 32'h0), 64'h0, ra, aux_a, err, cyc);
    check(!err && aux_a[63:RW] == 0, "enrollment answered"); m_init++;
    check(cyc == 8, $sformatf("enrollment latency %0d expected 8", cyc));
    issue(I_CHAL, rs1_of(2'b00, 0, 32'h0), 64'h0, 0, r1a, err, cyc);          // strong read of the same cells
    check(!err && near_codewords(aux_a[RW-1:0] ^ r1a[RW-1:0], ra, 2), "aux = R1 xor Encode(r)"); m_strong++;
    dec_cycles = 0;
    issue(I_CHAL, rs1_of(2'b01, 0, 32'hFFFF_FFFF), aux_a, 0, rd, err, cyc);    // miss: PUF read + ECC
    check(cyc == 1 + 8 + dec_cycles, $sformatf("E=01 miss latency %0d, decode %0d", cyc, dec_cycles));
    check(!err && rd == 64'(ra), $sformatf("weak key %h expected %h", rd, ra)); m_weak++;
    check(cyc > 1, "miss pays for PUF read and decode");
    issue(I_CHAL, rs1_of(2'b01, 0, 32'h1234), aux_a, 0, rd, err, cyc);         // hit
    check(!err && rd == 64'(ra), "weak key again"); m_weak++;
    check(cyc == 1, $sformatf("E=01 hit latency %0d expected 1", cyc));

    // ---- 2. hashed responses, batch of 16 on PUF 1 ----
    rb = 28'h0C0_FFEE;
    issue(I_INIT, rs1_of(2'b00, 1, 32'hCAFE_0001), 64'h0, rb, aux_b, err, cyc); m_init++;
    issue(I_CHAL, rs1_of(2'b00, 1, 32'hCAFE_0001), 64'h0, 0, r1b, err, cyc); m_strong++;
    check(near_codewords(aux_b[RW-1:0] ^ r1b[RW-1:0], rb, 2), "aux of PUF 1");
    for (int k = 0; k < 16; k++) begin
      logic [31:0] c;
      c = 32'h1000_0000 + 32'(k * 7919);
      issue(I_CHAL, rs1_of(2'b10, 1, c), aux_b, 0, rd, err, cyc, (k == 5) ? 4 : 0);
      check(!err && rd == sha3_256_first8({c, 32'(rb)}), $sformatf("R3 sample %0d", k));
      if (k > 0) check(cyc == 27, $sformatf("E=10 hit latency %0d expected 27", cyc));
      else       check(cyc > 27, "first sample misses");
      m_hash++;
    end

    // ---- 3. strong PUF reads on PUF 2 ----
    issue(I_CHAL, rs1_of(2'b00, 2, 32'h77), 64'h0, 0, r1a, err, cyc);
    issue(I_CHAL, rs1_of(2'b00, 2, 32'h77), 64'h0, 0, r1b, err, cyc);
    for (int b = 0; b < NBLK; b++)
      check($countones(r1a[b*15 +: 15] ^ r1b[b*15 +: 15]) <= 4, "strong reads within noise");
    check(r1a[63:RW] == 0 && cyc == 1 + dut.PUF_READ_LAT + 1, $sformatf("R1 latency %0d", cyc));
    m_strong += 2;

    // ---- 4. FIFO eviction: 9 enrollments of PUF 3 -> 9 entries ----
    for (int k = 0; k < 9; k++) begin
      rk[k] = 28'($urandom);
      issue(I_INIT, rs1_of(2'b00, 3, 32'h0000_0BAD), 64'h0, rk[k], auxk[k], err, cyc); m_init++;
      issue(I_CHAL, rs1_of(2'b10, 3, 32'h42), auxk[k], 0, rd, err, cyc);
      check(!err && rd == sha3_256_first8({32'h42, 32'(rk[k])}), "R3 for eviction set");
      check(cyc > 27, "new entry misses");
    end
    issue(I_CHAL, rs1_of(2'b10, 3, 32'h43), auxk[8], 0, rd, err, cyc);
    check(!err && cyc == 27 && rd == sha3_256_first8({32'h43, 32'(rk[8])}), "newest entry still cached");
    issue(I_CHAL, rs1_of(2'b10, 3, 32'h43), auxk[0], 0, rd, err, cyc);
    check(!err && rd == sha3_256_first8({32'h43, 32'(rk[0])}), "evicted entry recomputed");
    check(cyc > 27, "oldest entry was evicted");
    if (cyc > 27) m_evict++;

    // ---- 5. decode failures: corrupt the helper data of PUF 0 ----
    for (int k = 0; k < 40 && m_fail < 3; k++) begin
      logic [63:0] bad_aux;
      int p0, p1, p2;
      p0 = $urandom % 15; p1 = (p0 + 1 + $urandom % 14) % 15;
      do p2 = $urandom % 15; while (p2 == p0 || p2 == p1);
      bad_aux = aux_a;
      bad_aux[p0] ^= 1; bad_aux[p1] ^= 1; bad_aux[p2] ^= 1; bad_aux[30 + k % 15] ^= 1;
      issue(I_CHAL, rs1_of(2'b01, 0, 32'h0), bad_aux, 0, rd, err, cyc);
      check(err ? rd == 0 : rd != 64'(ra), "corrupted helper data never yields the key");
      if (err) m_fail++;
    end

    // ---- 6. illegal words ----
    issue(32'b0000000_00000_00101_011_01010_0101011, rs1_of(0, 0, 0), 0, 0, rd, err, cyc);
    check(err && rd == 0, "funct3 011 is illegal"); m_illegal += err;
    issue(32'b0000001_00110_00101_010_01010_0101011, rs1_of(0, 0, 0), 0, 0, rd, err, cyc);
    check(err && rd == 0, "funct7 != 0 is illegal"); m_illegal += err;
    issue(32'b0000000_00110_00101_001_01010_0101011, rs1_of(0, 0, 0), 0, 0, rd, err, cyc);
    check(err, "inner_puf_init with rs2 != x0 is illegal"); m_illegal += err;
    issue(I_CHAL, rs1_of(2'b11, 0, 0), aux_a, 0, rd, err, cyc);
    check(err, "E = 11 is reserved"); m_illegal += err;
    issue(I_CHAL, rs1_of(2'b01, 4, 0), aux_a, 0, rd, err, cyc);
    check(err, "PUF index 4 does not exist"); m_illegal += err;
    issue(32'h0000_0013, 0, 0, 0, rd, err, cyc);
    check(err, "other opcodes are refused"); m_illegal += err;

    // ---- 7. the weak key still works afterwards ----
    issue(I_CHAL, rs1_of(2'b01, 0, 32'h0), aux_a, 0, rd, err, cyc);
    check(!err && rd == 64'(ra), "weak key after errors");

    // ---- mechanism coverage ----
    $display("mechanisms: init=%0d strong=%0d weak=%0d hash=%0d lb_hit=%0d lb_miss=%0d evict=%0d ecc_correct=%0d decode_fail=%0d illegal=%0d stall=%0d",
             m_init, m_strong, m_weak, m_hash, m_hit, m_miss, m_evict, m_correct, m_fail, m_illegal, m_stall);
    check(m_init > 0, "enrollment happened");
    check(m_strong > 0, "E=00 happened");
    check(m_weak > 0, "E=01 happened");
    check(m_hash > 0, "E=10 happened");
    check(m_hit > 0, "lookaside hit happened");
    check(m_miss > 0, "lookaside miss happened");
    check(m_evict > 0, "FIFO eviction happened");
    check(m_correct > 0, "ECC corrected bit flips");
    check(m_fail > 0, "decode failure happened");
    check(m_illegal > 0, "illegal instruction happened");
    check(m_stall > 0, "response stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
