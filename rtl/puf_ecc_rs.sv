// puf_ecc_rs -- fuzzy-extractor error correction with a Reed-Solomon code.
//
// Alternative to puf_ecc with the same ports and the same code-offset
// construction (aux = R1 xor Encode(r), R2 = Decode(R1' xor aux)), built on
// one codeword of the Reed-Solomon code RS(15,7) over GF(16) (field
// polynomial x^4 + x + 1, primitive element a = 2). Its 15 four-bit symbols
// fill the 60-bit response and its 7 message symbols give the same 28-bit R2
// as the BCH version, so either can sit in the unit. The code corrects any
// four wrong symbols, i.e. bursts of flipped bits that stay inside few
// symbols. The paper evaluates a Reed-Solomon variant next to the BCH one
// but gives no code parameters; RS(15,7) and the decoder below are this
// design's choice.
//
// Encoding: systematic, generator g(x) = (x - a)(x - a^2)...(x - a^8);
// codeword c(x) = m(x) x^8 + (m(x) x^8 mod g(x)); symbol i of the 60-bit word
// (bits [4i+3:4i]) is the coefficient of x^i, so the message occupies
// symbols 8..14 (bits [59:32]).
//
// Decoding, one step per clock:
//   1 clock     syndromes S_j = y(a^j), j = 1..8
//   8 clocks    Berlekamp-Massey, one iteration each -> error locator L(x)
//   1 clock     error evaluator W(x) = S(x) L(x) mod x^8
//  15 clocks    Chien search over positions 14..0; where L(a^-i) = 0 the
//               symbol is corrected by Forney's e = W(a^-i) / L'(a^-i)
//   1 clock     result: R2 = corrected symbols 8..14; dec_fail if the number
//               of roots found differs from deg L (more than four errors)
// so dec_done comes 26 clocks after the start edge, every time; when all
// syndromes are zero the search still runs and finds nothing.
// Enrollment is combinational with a register: enc_done one clock after
// enc_valid.
module puf_ecc_rs #(
  localparam int unsigned P_RW = 60,
  localparam int unsigned P_KW = 28
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            enc_valid,
  input  logic [P_RW-1:0] enc_r1,
  input  logic [P_KW-1:0] enc_rnd,
  output logic            enc_done,
  output logic [P_RW-1:0] enc_aux,
  input  logic            dec_start,
  input  logic [P_RW-1:0] dec_r1,
  input  logic [P_RW-1:0] dec_aux,
  output logic            dec_busy,
  output logic            dec_done,
  output logic [P_KW-1:0] dec_r2,
  output logic            dec_fail
);

  localparam int NS = 15;   // symbols per codeword
  localparam int NP = 8;    // parity symbols = 2t

  typedef logic [3:0] gf_t;
  typedef gf_t [NP:0] poly_t;       // coefficients 0..8

  function automatic gf_t gf_mul(input gf_t a, input gf_t b);
    logic [6:0] p;
    p = '0;
    for (int i = 0; i < 4; i++) if (b[i]) p ^= 7'(a) << i;
    for (int i = 6; i >= 4; i--) if (p[i]) p ^= 7'b0010011 << (i - 4);
    return p[3:0];
  endfunction

  // a^e for 0 <= e < 15, used only at elaboration to build the tables below
  function automatic gf_t gf_pow(input gf_t a, input int e);
    gf_t r;
    r = 4'd1;
    for (int i = 0; i < e; i++) r = gf_mul(r, a);
    return r;
  endfunction

  typedef gf_t gf_tab_t [16];

  // EXP[e] = a^e (e = 0..14); INV[x] = x^14 = 1/x (INV[0] = 0, unused)
  function automatic gf_tab_t exp_table();
    for (int e = 0; e < 16; e++) exp_table[e] = gf_pow(4'd2, e % 15);
  endfunction

  function automatic gf_tab_t inv_table();
    for (int x = 0; x < 16; x++) inv_table[x] = gf_pow(gf_t'(x), 14);
  endfunction

  localparam gf_tab_t EXP = exp_table();
  localparam gf_tab_t INV = inv_table();

  function automatic gf_t gf_inv(input gf_t a);
    return INV[a];
  endfunction

  function automatic gf_t alpha(input int e);        // a^e, any integer e
    return EXP[((e % 15) + 15) % 15];
  endfunction

  // generator polynomial, g[8] = 1
  function automatic poly_t gen_poly();
    poly_t g;
    g = '0;
    g[0] = 4'd1;
    for (int j = 1; j <= NP; j++) begin
      poly_t n;
      n = '0;
      for (int i = 0; i <= NP; i++) begin
        if (i > 0) n[i] = g[i-1];
        n[i] = n[i] ^ gf_mul(g[i], alpha(j));
      end
      g = n;
    end
    return g;
  endfunction

  localparam poly_t G = gen_poly();

  function automatic logic [P_RW-1:0] rs_encode(input logic [P_KW-1:0] m);
    gf_t rem [NP];
    gf_t fb;
    for (int i = 0; i < NP; i++) rem[i] = '0;
    // LFSR division of m(x) x^8 by g(x), highest message symbol first
    for (int k = 6; k >= 0; k--) begin
      fb = m[4*k +: 4] ^ rem[NP-1];
      for (int i = NP - 1; i > 0; i--) rem[i] = rem[i-1] ^ gf_mul(fb, G[i]);
      rem[0] = gf_mul(fb, G[0]);
    end
    rs_encode = {m, 32'd0};
    for (int i = 0; i < NP; i++) rs_encode[4*i +: 4] = rem[i];
  endfunction

  // ---------------- enrollment ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enc_done <= 1'b0;
      enc_aux  <= '0;
    end else begin
      enc_done <= enc_valid;
      if (enc_valid) enc_aux <= enc_r1 ^ rs_encode(enc_rnd);
    end
  end

  // ---------------- reconstruction ----------------
  typedef enum logic [2:0] {R_IDLE, R_SYN, R_BM, R_OMEGA, R_CHIEN, R_DONE} rstate_e;

  rstate_e         st;
  logic [P_RW-1:0] y_q;
  gf_t             syn [1:NP];
  poly_t           lam, bpoly, omega;
  gf_t             bdisc;
  logic [3:0]      lreg;            // L, current locator length
  logic [3:0]      mgap;            // m, shift since last length change
  logic [3:0]      it;              // BM iteration / Chien position
  logic [3:0]      nroots;

  // ---- syndromes of the received word ----
  gf_t syn_now [1:NP];
  always_comb
    for (int j = 1; j <= NP; j++) begin
      syn_now[j] = '0;
      for (int i = NS - 1; i >= 0; i--)
        syn_now[j] = gf_mul(syn_now[j], alpha(j)) ^ y_q[4*i +: 4];
    end

  // ---- one Berlekamp-Massey iteration (n = it) ----
  gf_t   disc;
  poly_t lam_next, shifted;
  gf_t   coef;
  always_comb begin
    disc = syn[32'(it) + 1];
    for (int i = 1; i <= NP; i++)
      if (i <= 32'(lreg) && i <= 32'(it)) disc ^= gf_mul(lam[i], syn[32'(it) + 1 - i]);
    coef = gf_mul(disc, gf_inv(bdisc));
    shifted = '0;
    for (int i = 0; i <= NP; i++)
      if (i >= 32'(mgap)) shifted[i] = gf_mul(coef, bpoly[i - 32'(mgap)]);
    lam_next = lam ^ shifted;
  end

  // ---- Chien search and Forney at position it ----
  gf_t xinv, lam_val, dlam_val, om_val, xp, xprev, emag;
  integer deg_lam;
  always_comb begin
    xinv = alpha(-32'(it));
    lam_val = '0; dlam_val = '0; om_val = '0;
    xp = 4'd1;      // x^i
    xprev = 4'd1;   // x^(i-1)
    for (int i = 0; i <= NP; i++) begin
      lam_val ^= gf_mul(lam[i], xp);
      om_val  ^= gf_mul(omega[i], xp);
      // formal derivative: odd terms i contribute lam[i] x^(i-1)
      if (i % 2 == 1) dlam_val ^= gf_mul(lam[i], xprev);
      xprev = xp;
      xp = gf_mul(xp, xinv);
    end
    emag = gf_mul(om_val, gf_inv(dlam_val));
    deg_lam = 0;
    for (int i = 1; i <= NP; i++) if (lam[i] != '0) deg_lam = i;
  end

  assign dec_busy = (st != R_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= R_IDLE;
      y_q      <= '0;
      lam      <= '0;
      bpoly    <= '0;
      omega    <= '0;
      bdisc    <= '0;
      lreg     <= '0;
      mgap     <= '0;
      it       <= '0;
      nroots   <= '0;
      dec_done <= 1'b0;
      dec_r2   <= '0;
      dec_fail <= 1'b0;
      for (int j = 1; j <= NP; j++) syn[j] <= '0;
    end else begin
      dec_done <= 1'b0;
      unique case (st)
        R_IDLE: if (dec_start) begin
          y_q <= dec_r1 ^ dec_aux;
          st  <= R_SYN;
        end
        R_SYN: begin
          for (int j = 1; j <= NP; j++) syn[j] <= syn_now[j];
          lam      <= poly_t'(1);
          bpoly    <= poly_t'(1);
          bdisc    <= 4'd1;
          lreg     <= '0;
          mgap     <= 4'd1;
          it       <= '0;
          st       <= R_BM;
        end
        R_BM: begin
          if (disc == '0) begin
            mgap <= mgap + 4'd1;
          end else if (2 * 32'(lreg) <= 32'(it)) begin
            lam   <= lam_next;
            bpoly <= lam;
            bdisc <= disc;
            lreg  <= it + 4'd1 - lreg;
            mgap  <= 4'd1;
          end else begin
            lam  <= lam_next;
            mgap <= mgap + 4'd1;
          end
          it <= it + 4'd1;
          if (it == 4'(NP - 1)) st <= R_OMEGA;
        end
        R_OMEGA: begin
          // W(x) = S(x) L(x) mod x^8, S(x) = sum S_(j+1) x^j
          poly_t w;
          w = '0;
          for (int k = 0; k < NP; k++)
            for (int i = 0; i <= k; i++)
              w[k] = w[k] ^ gf_mul(lam[i], syn[k - i + 1]);
          omega  <= w;
          it     <= 4'(NS - 1);
          nroots <= '0;
          st     <= R_CHIEN;
        end
        R_CHIEN: begin
          if (lam_val == '0) begin
            y_q[4*it +: 4] <= y_q[4*it +: 4] ^ emag;
            nroots         <= nroots + 4'd1;
          end
          if (it == 4'd0) st <= R_DONE;
          else            it <= it - 4'd1;
        end
        R_DONE: begin
          dec_done <= 1'b1;
          dec_r2   <= y_q[P_RW-1 -: P_KW];
          dec_fail <= (32'(nroots) != deg_lam) || (deg_lam > NP / 2);
          st       <= R_IDLE;
        end
        default: st <= R_IDLE;
      endcase
    end
  end

endmodule
