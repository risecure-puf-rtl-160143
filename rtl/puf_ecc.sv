// puf_ecc -- fuzzy-extractor error correction for the PUF response.
//
// Code-offset fuzzy extractor over NBLK codewords of the binary BCH(15,7)
// code with designed distance 5 (corrects t = 2 errors per codeword),
// generator g(x) = x^8 + x^7 + x^6 + x^4 + 1, systematic form
// codeword = {m[6:0], (m(x) * x^8) mod g(x)}.
//
//   Enrollment     aux = R1 xor Encode(r)          (r: KW-bit random number)
//   Reconstruction R2  = Decode(R1' xor aux)       (R1': fresh noisy read)
//
// so R2 equals r whenever every codeword of R1' differs from R1 in at most
// two bits. The paper writes the enrollment as aux = Encode(R1 xor r) and the
// reconstruction as R2 = Decode(R1' xor aux); only the code-offset form above
// makes the two consistent (R1 is a codeword-length value, r a message), so
// the reconstruction formula is followed and the enrollment one is read as
// the code offset. The paper evaluates BCH and Reed-Solomon without giving
// code parameters; the BCH(15,7) code is this design's choice.
//
// Decoder: one codeword at a time. A cycle computes the syndrome
// s = y(x) mod g(x); if it is non-zero the decoder tries one error pattern per
// cycle, all weight-1 and weight-2 patterns in order (i, j) with i <= j, until
// the pattern's syndrome equals s (at most 120 cycles). Because the minimum
// distance is 5 the first match is the unique correction. No match means
// more than two errors: dec_fail is raised and the uncorrected message bits
// are returned. The exhaustive search is the simplest decoder that does the
// job; it is slow by design, which is what the lookaside buffer hides.
//
// Timing: enc_valid -> enc_done/enc_aux one clock later. dec_start (only
// accepted while dec_busy is low) -> dec_done high for one cycle,
// NBLK + (number of error patterns tried) clocks after the start edge: one
// syndrome cycle per codeword plus one cycle per pattern tried.
module puf_ecc #(
  parameter int unsigned P_NBLK = puf_pkg::NBLK,
  localparam int unsigned N     = puf_pkg::BCH_N,
  localparam int unsigned K     = puf_pkg::BCH_K,
  localparam int unsigned P_RW  = P_NBLK * N,
  localparam int unsigned P_KW  = P_NBLK * K
) (
  input  logic            clk,
  input  logic            rst_n,
  // enrollment
  input  logic            enc_valid,
  input  logic [P_RW-1:0] enc_r1,
  input  logic [P_KW-1:0] enc_rnd,
  output logic            enc_done,
  output logic [P_RW-1:0] enc_aux,
  // reconstruction
  input  logic            dec_start,
  input  logic [P_RW-1:0] dec_r1,
  input  logic [P_RW-1:0] dec_aux,
  output logic            dec_busy,
  output logic            dec_done,
  output logic [P_KW-1:0] dec_r2,
  output logic            dec_fail
);

  import puf_pkg::BCH_G;

  function automatic logic [7:0] bch_rem(input logic [N-1:0] v);
    logic [N-1:0] r;
    r = v;
    for (int i = N - 1; i >= 8; i--)
      if (r[i]) r[i -: 9] = r[i -: 9] ^ BCH_G;
    return r[7:0];
  endfunction

  function automatic logic [N-1:0] bch_encode(input logic [K-1:0] m);
    return {m, bch_rem({m, 8'h00})};
  endfunction

  function automatic logic [7:0] pow_rem(input logic [3:0] i);
    return bch_rem(N'(1) << i);
  endfunction

  // ---------------- enrollment ----------------
  logic [P_RW-1:0] offset;
  always_comb
    for (int b = 0; b < P_NBLK; b++)
      offset[b*N +: N] = bch_encode(enc_rnd[b*K +: K]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enc_done <= 1'b0;
      enc_aux  <= '0;
    end else begin
      enc_done <= enc_valid;
      if (enc_valid) enc_aux <= enc_r1 ^ offset;
    end
  end

  // ---------------- reconstruction ----------------
  typedef enum logic [1:0] {D_IDLE, D_SYN, D_SEARCH} dstate_e;

  dstate_e                      st;
  logic [P_RW-1:0]              y_q;
  logic [$clog2(P_NBLK+1)-1:0]  blk;
  logic [3:0]                   si, sj;
  logic [7:0]                   syn_q;
  logic [P_KW-1:0]              r2_q;
  logic                         fail_q;

  logic [N-1:0] y_b;
  logic [7:0]   s_now, cand;
  logic [N-1:0] e_pat;
  logic         last_blk;
  logic         bad;
  logic [N-1:0] fixed;

  assign y_b      = y_q[blk*N +: N];
  assign s_now    = bch_rem(y_b);
  assign cand     = pow_rem(si) ^ ((si == sj) ? 8'h00 : pow_rem(sj));
  assign e_pat    = (N'(1) << si) | (N'(1) << sj);
  assign last_blk = (32'(blk) == P_NBLK - 1);
  assign dec_busy = (st != D_IDLE);
  assign bad      = (cand != syn_q);
  assign fixed    = bad ? y_b : (y_b ^ e_pat);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= D_IDLE;
      y_q      <= '0;
      blk      <= '0;
      si       <= '0;
      sj       <= '0;
      syn_q    <= '0;
      r2_q     <= '0;
      fail_q   <= 1'b0;
      dec_done <= 1'b0;
      dec_r2   <= '0;
      dec_fail <= 1'b0;
    end else begin
      dec_done <= 1'b0;
      unique case (st)
        D_IDLE: if (dec_start) begin
          y_q    <= dec_r1 ^ dec_aux;
          blk    <= '0;
          fail_q <= 1'b0;
          st     <= D_SYN;
        end
        D_SYN: begin
          if (s_now == 8'h00) begin
            r2_q[blk*K +: K] <= y_b[N-1 -: K];
            if (last_blk) begin
              st       <= D_IDLE;
              dec_done <= 1'b1;
              dec_r2   <= {y_b[N-1 -: K], r2_q[P_KW-K-1:0]};
              dec_fail <= fail_q;
            end else begin
              blk <= blk + 1'b1;
            end
          end else begin
            syn_q <= s_now;
            si    <= '0;
            sj    <= '0;
            st    <= D_SEARCH;
          end
        end
        D_SEARCH: begin
          if (cand == syn_q || (si == 4'(N - 1) && sj == 4'(N - 1))) begin
            // correct (or give up on) this codeword
            r2_q[blk*K +: K] <= fixed[N-1 -: K];
            if (bad) fail_q <= 1'b1;
            if (last_blk) begin
              st       <= D_IDLE;
              dec_done <= 1'b1;
              dec_r2   <= {fixed[N-1 -: K], r2_q[P_KW-K-1:0]};
              dec_fail <= fail_q | bad;
            end else begin
              blk <= blk + 1'b1;
              st  <= D_SYN;
            end
          end else if (sj == 4'(N - 1)) begin
            si <= si + 4'd1;
            sj <= si + 4'd1;
          end else begin
            sj <= sj + 4'd1;
          end
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  initial assert (P_NBLK >= 2) else $error("P_NBLK must be at least 2");

endmodule
