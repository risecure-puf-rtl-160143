// lookaside_buffer -- cache of error-corrected inner PUF responses.
//
// In batch sampling the same inner PUF is challenged many times in a row, and
// each sample would otherwise pay for a PUF read and a full ECC decode. Like a
// TLB, this buffer remembers recent results: an entry maps a tag made of the
// PUF index, the inner challenge and the helper data aux (the inputs that
// determine the corrected response) to the stable response R2. The paper says
// the buffer keeps R1 and aux and is checked for them before the ECC runs, and
// its figure shows it storing the ECC output; keying on (index, challenge,
// aux) and storing R2 satisfies both. As in the paper it is a FIFO: entries
// are written in order into DEPTH slots and the oldest is overwritten.
// Lookup is fully associative.
//
// Interface and timing: lookup is combinational (hit/hit_data follow
// lookup_tag in the same cycle). ins_valid writes {ins_tag, ins_data} into
// the slot at the write pointer on the clock edge; the caller inserts only
// after a miss, so a tag is never held twice. flush clears every valid bit.
// DEPTH is not given by the paper.
module lookaside_buffer #(
  parameter int unsigned TW    = 94,
  parameter int unsigned DW    = puf_pkg::KW,
  parameter int unsigned DEPTH = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          flush,
  input  logic [TW-1:0] lookup_tag,
  output logic          hit,
  output logic [DW-1:0] hit_data,
  input  logic          ins_valid,
  input  logic [TW-1:0] ins_tag,
  input  logic [DW-1:0] ins_data
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  typedef struct packed {
    logic          valid;
    logic [TW-1:0] tag;
    logic [DW-1:0] data;
  } entry_t;

  entry_t            mem [DEPTH];
  logic [PW-1:0]     wr_ptr;
  logic [DEPTH-1:0]  match;

  always_comb begin
    hit      = 1'b0;
    hit_data = '0;
    for (int i = 0; i < DEPTH; i++) begin
      match[i] = mem[i].valid && (mem[i].tag == lookup_tag);
      if (match[i]) begin
        hit      = 1'b1;
        hit_data = hit_data | mem[i].data;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (flush) begin
      wr_ptr <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i].valid <= 1'b0;
    end else if (ins_valid) begin
      mem[wr_ptr] <= '{valid: 1'b1, tag: ins_tag, data: ins_data};
      wr_ptr      <= (32'(wr_ptr) == DEPTH - 1) ? '0 : wr_ptr + 1'b1;
    end
  end

  // a tag is never stored twice, so at most one slot matches
  always_comb assert ($onehot0(match) || !rst_n);

endmodule
