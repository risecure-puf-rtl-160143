// tb_lookaside_buffer -- checks lookups, inserts, first-in-first-out
// replacement and flush of the lookaside buffer against a queue model.
module tb_lookaside_buffer;
  localparam int TW = 94, DW = 28, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          flush = 0, ins_valid = 0, hit;
  logic [TW-1:0] lookup_tag, ins_tag;
  logic [DW-1:0] hit_data, ins_data;
  int checks = 0, failures = 0;

  lookaside_buffer #(.TW(TW), .DW(DW), .DEPTH(DEPTH)) dut (.clk, .rst_n, .flush,
    .lookup_tag, .hit, .hit_data, .ins_valid, .ins_tag, .ins_data);

  typedef struct { logic [TW-1:0] tag; logic [DW-1:0] data; } ent_t;
  ent_t model [$];
  logic [TW-1:0] seen [$];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic probe(input logic [TW-1:0] t);
    bit found = 0;
    logic [DW-1:0] d = '0;
    foreach (model[i]) if (model[i].tag == t) begin found = 1; d = model[i].data; end
    lookup_tag = t;
    #1;
    check(hit == found, $sformatf("hit=%0d expected %0d", hit, found));
    if (found) check(hit_data == d, "hit data");
  endtask

  function automatic logic [TW-1:0] rnd_tag();
    return {30'($urandom), $urandom, $urandom};
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int evictions = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      logic [TW-1:0] t;
      @(negedge clk);
      // look up either a previously used tag or a fresh one
      t = (seen.size() > 0 && $urandom % 2) ? seen[$urandom % seen.size()] : rnd_tag();
      probe(t);
      if (!hit && ($urandom % 4 != 0)) begin   // miss -> insert, as the controller does
        ins_valid = 1; ins_tag = t; ins_data = 28'($urandom);
        seen.push_back(t);
        model.push_back('{t, ins_data});
        if (model.size() > DEPTH) begin void'(model.pop_front()); evictions++; end
        @(negedge clk);
        ins_valid = 0;
        probe(t);
      end
      if (n == 300) begin
        flush = 1;
        @(negedge clk);
        flush = 0;
        model.delete();
        foreach (seen[i]) probe(seen[i]);
      end
    end
    check(evictions > 20, "FIFO replacement exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
