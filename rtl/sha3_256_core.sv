// sha3_256_core -- SHA3-256 of a short fixed-length message.
//
// Computes the one-way function of the design, R3 = Hash(R2 || C). The
// paper's resource table names a SHA-3 module; SHA3-256 (FIPS 202, rate 1088
// bits, domain suffix 01) is the variant chosen here. Because the inner
// response and the challenge have fixed lengths, the message always fits in
// one 136-byte block, so the core only absorbs once: the state is loaded with
// the padded message, Keccak-f[1600] runs 24 rounds, and the first 256 bits of
// the state are the digest. Fixing the message length is also what the
// paper's security argument relies on to rule out length extension.
//
// Interface: msg holds MSG_BYTES bytes, byte 0 in bits [7:0] (the order in
// which FIPS 202 absorbs them). start is accepted while busy is low. One
// Keccak round is applied per clock; done is high for one cycle 24 clocks
// after the start edge, with digest holding the 32 digest bytes, byte 0 in
// bits [7:0]. digest keeps its value until the next start.
module sha3_256_core #(
  parameter int unsigned MSG_BYTES = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [8*MSG_BYTES-1:0] msg,
  output logic                   busy,
  output logic                   done,
  output logic [255:0]           digest
);

  localparam int unsigned RATE_BYTES = 136;

  typedef logic [63:0] lane_t;
  typedef lane_t [24:0] state_t;     // lane index x + 5*y

  localparam lane_t RC [24] = '{
    64'h0000_0000_0000_0001, 64'h0000_0000_0000_8082, 64'h8000_0000_0000_808A,
    64'h8000_0000_8000_8000, 64'h0000_0000_0000_808B, 64'h0000_0000_8000_0001,
    64'h8000_0000_8000_8081, 64'h8000_0000_0000_8009, 64'h0000_0000_0000_008A,
    64'h0000_0000_0000_0088, 64'h0000_0000_8000_8009, 64'h0000_0000_8000_000A,
    64'h0000_0000_8000_808B, 64'h8000_0000_0000_008B, 64'h8000_0000_0000_8089,
    64'h8000_0000_0000_8003, 64'h8000_0000_0000_8002, 64'h8000_0000_0000_0080,
    64'h0000_0000_0000_800A, 64'h8000_0000_8000_000A, 64'h8000_0000_8000_8081,
    64'h8000_0000_0000_8080, 64'h0000_0000_8000_0001, 64'h8000_0000_8000_8008
  };

  // rotation offsets, indexed x + 5*y
  localparam int RHO [25] = '{
     0,  1, 62, 28, 27,
    36, 44,  6, 55, 20,
     3, 10, 43, 25, 39,
    41, 45, 15, 21,  8,
    18,  2, 61, 56, 14
  };

  function automatic lane_t rotl(input lane_t v, input int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic state_t keccak_round(input state_t a, input lane_t rc);
    lane_t  c [5];
    lane_t  d [5];
    state_t b, r;
    for (int x = 0; x < 5; x++)
      c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    // theta, rho and pi: B[y][2x+3y] = rot(A[x][y] ^ D[x], r[x][y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(a[x + 5*y] ^ d[x], RHO[x + 5*y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        r[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    // iota
    r[0] = r[0] ^ rc;
    return r;
  endfunction

  // padded single block: msg || 0x06 || 0...0 || 0x80
  function automatic state_t absorb(input logic [8*MSG_BYTES-1:0] m);
    logic [8*RATE_BYTES-1:0] blk;
    state_t s;
    blk = '0;
    blk[8*MSG_BYTES-1:0] = m;
    blk[8*MSG_BYTES +: 8] = 8'h06;
    blk[8*RATE_BYTES-1 -: 8] = blk[8*RATE_BYTES-1 -: 8] | 8'h80;
    s = '0;
    for (int i = 0; i < RATE_BYTES/8; i++) s[i] = blk[64*i +: 64];
    return s;
  endfunction

  state_t     st;
  logic [4:0] round;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= '0;
      round <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (busy) begin
        st    <= keccak_round(st, RC[round]);
        round <= round + 5'd1;
        if (round == 5'd23) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end else if (start) begin
        st    <= absorb(msg);
        round <= '0;
        busy  <= 1'b1;
      end
    end
  end

  assign digest = {st[3], st[2], st[1], st[0]};

  initial assert (MSG_BYTES < RATE_BYTES) else $error("message must fit one block");

endmodule
