// tb_sram_puf_array -- checks the SRAM PUF model: read latency and handshake,
// stability of a noise-free instance, that a noisy instance stays within
// NOISE_PER_BLK flipped bits per 15-bit group of its noise-free twin (same
// seed) while still showing noise, and that instances and challenges give
// distinct responses.
module tb_sram_puf_array;
  localparam int RW = 60, LAT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req_valid = 0;
  logic [1:0]  req_idx;
  logic [31:0] req_chal;
  logic        rdy_q, rdy_n, vq, vn;
  logic [RW-1:0] rq, rn;
  int checks = 0, failures = 0;

  sram_puf_array #(.NOISE_PER_BLK(0), .READ_LAT(LAT)) dut_quiet (
    .clk, .rst_n, .req_valid, .req_ready(rdy_q), .req_idx, .req_chal, .rsp_valid(vq), .rsp_r1(rq));
  sram_puf_array #(.NOISE_PER_BLK(2), .READ_LAT(LAT)) dut_noisy (
    .clk, .rst_n, .req_valid, .req_ready(rdy_n), .req_idx, .req_chal, .rsp_valid(vn), .rsp_r1(rn));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one read on both instances; returns both responses and checks timing
  task automatic read(input logic [1:0] i, input logic [31:0] c,
                      output logic [RW-1:0] q, output logic [RW-1:0] n);
    int cyc;
    @(negedge clk);
    check(rdy_q && rdy_n, "ready when idle");
    req_valid = 1; req_idx = i; req_chal = c;
    @(negedge clk);
    req_valid = 0;
    check(!rdy_q && !rdy_n, "not ready while reading");
    cyc = 0;
    while (!vq) begin @(negedge clk); cyc++; end
    check(cyc == LAT, $sformatf("latency %0d", cyc));   // edges after the accept edge
    check(vn, "both respond together");
    q = rq; n = rn;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [RW-1:0] q0, n0, q1, n1, first [4];
    int noisy_reads = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) begin
      read(2'(i), 32'h1234_5678, q0, n0);
      first[i] = q0;
      for (int k = 0; k < 30; k++) begin
        read(2'(i), 32'h1234_5678, q1, n1);
        check(q1 == q0, "noise-free instance is stable");
        for (int g = 0; g < 4; g++)
          check($countones(n1[g*15 +: 15] ^ q1[g*15 +: 15]) <= 2, "at most 2 flips per group");
        if (n1 != q1) noisy_reads++;
      end
    end
    check(noisy_reads > 20, $sformatf("noise is present (%0d noisy reads)", noisy_reads));
    for (int i = 0; i < 4; i++)
      for (int j = i + 1; j < 4; j++)
        check($countones(first[i] ^ first[j]) > 10, "instances differ");
    read(2'd0, 32'h1234_5679, q1, n1);
    check($countones(q1 ^ first[0]) > 10, "challenges differ");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
