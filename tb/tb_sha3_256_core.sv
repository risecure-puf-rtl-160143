// tb_sha3_256_core -- checks SHA3-256 digests of 8-byte messages against
// published-algorithm reference values, the 24-clock latency, and the busy
// flag. Reference digests are written as the usual hex strings (byte 0
// first) and byte-reversed here to the core's byte-0-in-bits-[7:0] order.
module tb_sha3_256_core;
  logic         clk = 0, rst_n = 0, start = 0, busy, done;
  logic [63:0]  msg;
  logic [255:0] digest;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sha3_256_core #(.MSG_BYTES(8)) dut (.clk, .rst_n, .start, .msg, .busy, .done, .digest);

  typedef struct { logic [63:0] m; logic [255:0] d; } vec_t;
  // message bytes and digest as printed (first byte leftmost)
  vec_t vecs [4] = '{
    '{64'h0000000000000000, 256'h48dda5bbe9171a6656206ec56c595c5834b6cf38c5fe71bcb44fe43833aee9df},
    '{64'h0102030405060708, 256'hc9ffb8f9d7ebc1adbcbc316cfee034cba158b7c6c93c34642a0b8429666a3d10},
    '{64'hffffffffffffffff, 256'hdab9bad679ac69aab7717528842fb867663afa6d4822d159cfcedbe5b6819eb9},
    '{64'h0123456789abcdef, 256'h804f48f870f9d2f5e0966b4603a22bb1d62e4c2181d9498820eb5cae906df93a}
  };

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (vecs[i]) begin
      int cyc;
      @(negedge clk);
      msg   = {<<8{vecs[i].m}};
      start = 1;
      @(negedge clk);
      start = 0;
      check(busy, "busy after start");
      cyc = 0;   // clock edges since the start edge
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == 24, $sformatf("latency %0d, expected 24", cyc));
      check(digest == {<<8{vecs[i].d}}, $sformatf("digest %0d: %h", i, {<<8{digest}}));
      check(!busy, "idle after done");
      @(negedge clk);
      check(!done, "done is one pulse");
      check(digest == {<<8{vecs[i].d}}, "digest held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
