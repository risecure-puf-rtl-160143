// tb_batch_sampling -- batch-sampling workload: the same PUF, inner
// challenge and helper data are sampled with n different outer challenges
// (E = 10), for n = 1 .. 32, on four units side by side: BCH and
// Reed-Solomon error correction, each with the lookaside buffer (LB_EN = 1)
// and without (LB_EN = 0). All must return SHA3-256(r || C) for every sample.
// A unit with the buffer must take exactly miss + (n - 1) * 27 clocks; one
// without it pays the PUF read and the decode on every sample. The
// Reed-Solomon decoder has a fixed 26-clock decode, so its miss takes
// 61 clocks. Clock counts and speed-ups are printed per batch size; the
// buffered units must be faster from n = 2 on. Last, every unit derives a
// device key (E = 01) from a PUF enrolled at challenge 0, must refuse helper
// data with eight wrong symbols, and the single-CRP
// rate of R2 alone and of R3 (R2 plus the hash) is printed for the units
// without the buffer.
module tb_batch_sampling;
  import puf_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0]     instr;
  logic [XLEN-1:0] rs1, rs2;
  logic [KW-1:0]   rnd;
  localparam int NU = 4;   // 0: BCH+buffer, 1: BCH, 2: RS+buffer, 3: RS
  logic            v [NU], rdy [NU], rv [NU], err [NU];
  logic [XLEN-1:0] rd [NU];

  risecure_puf_unit #(.LB_EN(1'b1)) dut_lb (.clk, .rst_n, .req_valid(v[0]), .req_ready(rdy[0]),
    .req_instr(instr), .req_rs1(rs1), .req_rs2(rs2), .rnd, .rsp_valid(rv[0]), .rsp_ready(1'b1),
    .rsp_rd(rd[0]), .rsp_err(err[0]));
  risecure_puf_unit #(.LB_EN(1'b0)) dut_nolb (.clk, .rst_n, .req_valid(v[1]), .req_ready(rdy[1]),
    .req_instr(instr), .req_rs1(rs1), .req_rs2(rs2), .rnd, .rsp_valid(rv[1]), .rsp_ready(1'b1),
    .rsp_rd(rd[1]), .rsp_err(err[1]));
  risecure_puf_unit #(.LB_EN(1'b1), .ECC_RS(1'b1)) dut_rs_lb (.clk, .rst_n, .req_valid(v[2]), .req_ready(rdy[2]),
    .req_instr(instr), .req_rs1(rs1), .req_rs2(rs2), .rnd, .rsp_valid(rv[2]), .rsp_ready(1'b1),
    .rsp_rd(rd[2]), .rsp_err(err[2]));
  risecure_puf_unit #(.LB_EN(1'b0), .ECC_RS(1'b1)) dut_rs_nolb (.clk, .rst_n, .req_valid(v[3]), .req_ready(rdy[3]),
    .req_instr(instr), .req_rs1(rs1), .req_rs2(rs2), .rnd, .rsp_valid(rv[3]), .rsp_ready(1'b1),
    .rsp_rd(rd[3]), .rsp_err(err[3]));

  localparam logic [31:0] I_INIT = 32'b0000000_00000_00101_001_01010_0101011;
  localparam logic [31:0] I_CHAL = 32'b0000000_00110_00101_010_01010_0101011;

  int checks = 0, failures = 0;
  bit expect_err = 0;   // the next results should be errors

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one instruction on unit u; returns clocks from accept to result
  task automatic issue(input int u, input logic [31:0] ins, input logic [63:0] a, input logic [63:0] b,
                       input logic [KW-1:0] r, output logic [63:0] res, output int cyc);
    @(negedge clk);
    while (!rdy[u]) @(negedge clk);
    v[u] = 1; instr = ins; rs1 = a; rs2 = b; rnd = r;
    @(negedge clk);
    v[u] = 0;
    cyc = 0;
    while (!rv[u]) begin @(negedge clk); cyc++; end
    res = rd[u];
    check(err[u] == expect_err, expect_err ? "error expected" : "no error");
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] aux [NU], res;
    logic [KW-1:0] r;
    int cyc, total [NU], miss_lat [NU];
    int hash_sum [NU], hash_cnt, key_sum [NU];
    for (int u = 0; u < NU; u++) begin v[u] = 0; hash_sum[u] = 0; key_sum[u] = 0; end
    hash_cnt = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 1; n <= 32; n++) begin
      r = 28'($urandom);
      // fresh enrollment per batch so the first sample always misses
      for (int u = 0; u < NU; u++)
        issue(u, I_INIT, {2'b00, 22'd0, 8'(n % 4), 32'h5000_0000 + 32'(n)}, 0, r, aux[u], cyc);
      for (int u = 0; u < NU; u++) begin
        total[u] = 0;
        for (int k = 0; k < n; k++) begin
          logic [31:0] c;
          c = $urandom;
          issue(u, I_CHAL, {2'b10, 22'd0, 8'(n % 4), c}, aux[u], 0, res, cyc);
          check(res == sha3_256_first8({c, 32'(r)}), $sformatf("unit %0d batch %0d sample %0d", u, n, k));
          if (k == 0) miss_lat[u] = cyc;
          total[u] += cyc;
        end
        hash_sum[u] += total[u];
      end
      hash_cnt += n;
      check(total[0] == miss_lat[0] + (n - 1) * 27, $sformatf("BCH buffered batch %0d took %0d", n, total[0]));
      check(total[2] == miss_lat[2] + (n - 1) * 27, $sformatf("RS buffered batch %0d took %0d", n, total[2]));
      check(miss_lat[2] == 61 && total[3] == 61 * n, $sformatf("RS sample time, batch %0d", n));
      if (n >= 2) check(total[0] < total[1] && total[2] < total[3], $sformatf("buffer faster at batch %0d", n));
      $display("batch %2d: BCH %5d / %5d clocks (x%0.2f), RS %5d / %5d clocks (x%0.2f) with / without buffer",
               n, total[0], total[1], real'(total[1]) / real'(total[0]),
               total[2], total[3], real'(total[3]) / real'(total[2]));
    end
    // device key on every unit: enroll PUF 3 at C0 = 0, then read R2 (E = 01)
    // 16 times; each read must give back r. With the buffer the repeats
    // take 1 clock; the RS decode makes every unbuffered RS read 35 clocks.
    r = 28'($urandom);
    for (int u = 0; u < NU; u++) begin
      issue(u, I_INIT, {2'b00, 22'd0, 8'd3, 32'd0}, 0, r, aux[u], cyc);
      for (int k = 0; k < 16; k++) begin
        issue(u, I_CHAL, {2'b01, 22'd0, 8'd3, 32'($urandom)}, aux[u], 0, res, cyc);
        key_sum[u] += cyc;
        check(res == 64'(r), $sformatf("unit %0d key read %0d", u, k));
        if (u >= 2 && (k == 0 || u == 3)) check(cyc == 35, $sformatf("RS unit %0d key read %0d took %0d", u, k, cyc));
        if ((u == 0 || u == 2) && k > 0) check(cyc == 1, $sformatf("unit %0d buffered key read took %0d", u, cyc));
      end
    end
    // helper data with 8 wrong symbols: every unit must refuse it, twice
    // (a failed decode is not cached), and still accept the right aux after
    expect_err = 1;
    for (int u = 0; u < NU; u++)
      for (int k = 0; k < 2; k++) begin
        issue(u, I_CHAL, {2'b01, 22'd0, 8'd3, 32'd0}, aux[u] ^ 64'h0000_0005_5555_5550, 0, res, cyc);
        check(res == 0, $sformatf("unit %0d: rd = 0 on a failed decode", u));
      end
    expect_err = 0;
    for (int u = 0; u < NU; u++) begin
      issue(u, I_CHAL, {2'b01, 22'd0, 8'd3, 32'd0}, aux[u], 0, res, cyc);
      check(res == 64'(r), $sformatf("unit %0d key after failed decode", u));
    end
    // single-CRP rate without the buffer: stable response alone (E = 01)
    // against stable response plus hash (E = 10), per 1000 clocks
    for (int u = 1; u < NU; u += 2) begin
      real r2_rate, r3_rate;
      r2_rate = 1000.0 * 16 / real'(key_sum[u]);
      r3_rate = 1000.0 * hash_cnt / real'(hash_sum[u]);
      check(r3_rate < r2_rate, $sformatf("hash costs time on unit %0d", u));
      $display("single CRP, %s, no buffer: R2 %0.2f, R3 %0.2f per 1000 clocks (%0.1f%%)",
               u == 1 ? "BCH" : "RS", r2_rate, r3_rate, 100.0 * (r3_rate - r2_rate) / r2_rate);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
