// risecure_puf_unit -- PUF functional unit for a RISC-V core (top level).
//
// The unit gives software one uniform way to sample a PUF in three ways,
// chosen by the output selector E[1:0]:
//   E = 00  R1: raw response of the selected PUF to the outer challenge C
//           (use as a strong PUF; no error correction);
//   E = 01  R2: stable response rebuilt by the fuzzy extractor from a fresh
//           read at a fixed challenge and the helper data aux (use as a weak
//           PUF for key generation);
//   E = 10  R3 = Hash(R2 || C): R2 is rebuilt from the inner challenge C0
//           registered by inner_puf_init and hashed together with C, which
//           hides the PUF from modelling attacks.
//
// Instructions (decoded by puf_ise_decoder, fields in puf_pkg):
//   inner_puf_init rd, rs1      rs1 = {idx, C0}. Records C0 for PUF idx,
//                               reads R1 = PUF_idx(C0) and returns
//                               aux = R1 xor Encode(r), r taken from the
//                               rnd input when the instruction is accepted.
//   outer_puf_chal rd, rs1, rs2 rs1 = {E, idx, C}, rs2 = aux. Returns R1, R2
//                               or R3 as listed above.
// Before error correction the lookaside buffer (LB_EN = 1) is searched for
// (idx, inner challenge, aux); on a hit the stored R2 is used and neither the
// PUF nor the ECC is touched, which is what makes batch sampling fast. On a
// miss the decoded R2 is inserted. A failed decode (more errors than the code
// corrects) returns rd = 0 with rsp_err set and is not cached. Undecodable
// words with the PUF opcode, a PUF index >= NUM_PUF or E = 11 also answer with
// rsp_err and rd = 0; a word with another opcode is answered the same way.
//
// ECC_RS selects the error-correcting code: 0 (default) four BCH(15,7)
// codewords (puf_ecc), 1 one RS(15,7) codeword over GF(16) (puf_ecc_rs). Both
// map a 60-bit response to a 28-bit R2, so nothing else changes.
//
// Datapath follows the paper's architecture and lookaside-buffer figures:
// instruction decoder, challenge MUX, PUF bank with select, ECC with aux,
// lookaside buffer between ECC and hash, hash fed by the outer challenge.
// This design's choices: the request/response handshake towards the core,
// the per-PUF C0 register, the rs1 layout, the 64-bit result (the first 8
// bytes of the SHA3-256 digest for R3, zero-extended R1/R2/aux otherwise),
// and the hash message layout: bytes 0-3 = R2 (little-endian, zero-extended
// to 32 bits), bytes 4-7 = C (little-endian).
//
// Handshake: req_* is taken on a clock edge with req_valid && req_ready;
// req_ready is high only when idle (one instruction at a time). The result is
// held on rsp_* from rsp_valid until an edge with rsp_ready high. Latency from
// acceptance to rsp_valid: 1 clock for an E = 01 hit, 27 for an E = 10 hit;
// misses add the PUF read and the ECC search.
module risecure_puf_unit
  import puf_pkg::*;
#(
  parameter bit          LB_EN         = 1'b1,
  parameter bit          ECC_RS        = 1'b0,
  parameter int unsigned LB_DEPTH      = 8,
  parameter int unsigned PUF_READ_LAT  = 4,
  parameter int unsigned PUF_NOISE     = 1,
  parameter logic [63:0] PUF_SEED      = 64'h5EC0_2E0F_A11C_E5D1
) (
  input  logic            clk,
  input  logic            rst_n,
  // instruction issue from the core
  input  logic            req_valid,
  output logic            req_ready,
  input  logic [31:0]     req_instr,
  input  logic [XLEN-1:0] req_rs1,
  input  logic [XLEN-1:0] req_rs2,
  // random number r for enrollment, from an external entropy source
  input  logic [KW-1:0]   rnd,
  // result to the core
  output logic            rsp_valid,
  input  logic            rsp_ready,
  output logic [XLEN-1:0] rsp_rd,
  output logic            rsp_err
);

  localparam int unsigned TW = IDXW + CW + RW;
  // noise of the PUF model is bounded per BCH codeword, or per whole
  // response for the Reed-Solomon variant (whose symbols cross those groups)
  localparam int unsigned PUF_GROUP = ECC_RS ? RW : BCH_N;

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_PUF_REQ, S_PUF_WAIT, S_ENC, S_ENC_WAIT,
    S_DEC, S_DEC_WAIT, S_HASH, S_HASH_WAIT, S_RESP
  } state_e;

  state_e st;

  // ---------------- decoded request ----------------
  puf_op_e         d_op;
  logic [IDXW-1:0] d_idx;
  logic [CW-1:0]   d_chal;
  puf_mode_e       d_mode;
  logic            d_bad;

  puf_ise_decoder #(.P_NUM_PUF(NUM_PUF), .P_CW(CW)) u_dec (
    .instr(req_instr), .rs1(req_rs1),
    .op(d_op), .idx(d_idx), .chal(d_chal), .mode(d_mode), .bad_operand(d_bad)
  );

  puf_op_e         op_q;
  logic [IDXW-1:0] idx_q;
  logic [CW-1:0]   chal_q;
  puf_mode_e       mode_q;
  logic [RW-1:0]   aux_q;
  logic [KW-1:0]   rnd_q;
  logic [RW-1:0]   r1_q;
  logic [KW-1:0]   r2_q;
  logic [CW-1:0]   c0_tab [NUM_PUF];

  // ---------------- challenge MUX ----------------
  puf_mode_e     mux_e;
  logic [CW-1:0] mux_c0, puf_chal;

  assign mux_e  = (op_q == OP_INIT) ? E_HASH : mode_q;
  assign mux_c0 = (op_q == OP_INIT) ? chal_q : c0_tab[idx_q];

  puf_challenge_mux #(.P_CW(CW)) u_mux (
    .e(mux_e), .c(chal_q), .c0(mux_c0), .puf_chal(puf_chal)
  );

  // ---------------- PUF bank ----------------
  logic          puf_req_valid, puf_req_ready, puf_rsp_valid;
  logic [RW-1:0] puf_rsp_r1;

  assign puf_req_valid = (st == S_PUF_REQ);

  sram_puf_array #(
    .P_NUM_PUF(NUM_PUF), .P_CW(CW), .P_RW(RW), .BLKW(PUF_GROUP),
    .NOISE_PER_BLK(PUF_NOISE), .READ_LAT(PUF_READ_LAT), .SEED(PUF_SEED)
  ) u_puf (
    .clk, .rst_n,
    .req_valid(puf_req_valid), .req_ready(puf_req_ready),
    .req_idx(idx_q), .req_chal(puf_chal),
    .rsp_valid(puf_rsp_valid), .rsp_r1(puf_rsp_r1)
  );

  // ---------------- ECC ----------------
  logic          enc_valid, enc_done, dec_start, dec_busy, dec_done, dec_fail;
  logic [RW-1:0] enc_aux;
  logic [KW-1:0] dec_r2;

  assign enc_valid = (st == S_ENC);
  assign dec_start = (st == S_DEC);

  if (ECC_RS) begin : g_rs
    puf_ecc_rs u_ecc (
      .clk, .rst_n,
      .enc_valid, .enc_r1(r1_q), .enc_rnd(rnd_q), .enc_done, .enc_aux,
      .dec_start, .dec_r1(r1_q), .dec_aux(aux_q), .dec_busy, .dec_done, .dec_r2, .dec_fail
    );
  end else begin : g_bch
    puf_ecc #(.P_NBLK(NBLK)) u_ecc (
      .clk, .rst_n,
      .enc_valid, .enc_r1(r1_q), .enc_rnd(rnd_q), .enc_done, .enc_aux,
      .dec_start, .dec_r1(r1_q), .dec_aux(aux_q), .dec_busy, .dec_done, .dec_r2, .dec_fail
    );
  end

  // ---------------- lookaside buffer ----------------
  logic [TW-1:0] lb_tag;
  logic          lb_hit_raw, lb_hit, lb_ins;
  logic [KW-1:0] lb_data;

  assign lb_tag = {idx_q, puf_chal, aux_q};
  assign lb_hit = LB_EN && lb_hit_raw;
  assign lb_ins = LB_EN && (st == S_DEC_WAIT) && dec_done && !dec_fail;

  lookaside_buffer #(.TW(TW), .DW(KW), .DEPTH(LB_DEPTH)) u_lb (
    .clk, .rst_n, .flush(1'b0),
    .lookup_tag(lb_tag), .hit(lb_hit_raw), .hit_data(lb_data),
    .ins_valid(lb_ins), .ins_tag(lb_tag), .ins_data(dec_r2)
  );

  // ---------------- hash ----------------
  logic         h_start, h_busy, h_done;
  logic [255:0] h_digest;

  assign h_start = (st == S_HASH);

  sha3_256_core #(.MSG_BYTES(8)) u_hash (
    .clk, .rst_n, .start(h_start),
    .msg({chal_q, 32'(r2_q)}),
    .busy(h_busy), .done(h_done), .digest(h_digest)
  );

  // ---------------- control ----------------
  assign req_ready = (st == S_IDLE);
  assign rsp_valid = (st == S_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      op_q    <= OP_NONE;
      idx_q   <= '0;
      chal_q  <= '0;
      mode_q  <= E_STRONG;
      aux_q   <= '0;
      rnd_q   <= '0;
      r1_q    <= '0;
      r2_q    <= '0;
      rsp_rd  <= '0;
      rsp_err <= 1'b0;
      for (int i = 0; i < NUM_PUF; i++) c0_tab[i] <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (req_valid) begin
          op_q    <= d_op;
          idx_q   <= d_idx;
          chal_q  <= d_chal;
          mode_q  <= d_mode;
          aux_q   <= req_rs2[RW-1:0];
          rnd_q   <= rnd;
          rsp_rd  <= '0;
          rsp_err <= 1'b0;
          if (d_op == OP_INIT && !d_bad) begin
            c0_tab[d_idx] <= d_chal;
            st <= S_PUF_REQ;
          end else if (d_op == OP_CHAL && !d_bad) begin
            st <= (d_mode == E_STRONG) ? S_PUF_REQ : S_LOOKUP;
          end else begin
            rsp_err <= 1'b1;
            st      <= S_RESP;
          end
        end
        S_LOOKUP: begin
          if (lb_hit) begin
            r2_q <= lb_data;
            if (mode_q == E_HASH) st <= S_HASH;
            else begin
              rsp_rd <= XLEN'(lb_data);
              st     <= S_RESP;
            end
          end else begin
            st <= S_PUF_REQ;
          end
        end
        S_PUF_REQ: if (puf_req_ready) st <= S_PUF_WAIT;
        S_PUF_WAIT: if (puf_rsp_valid) begin
          r1_q <= puf_rsp_r1;
          if (op_q == OP_INIT) st <= S_ENC;
          else if (mode_q == E_STRONG) begin
            rsp_rd <= XLEN'(puf_rsp_r1);
            st     <= S_RESP;
          end else st <= S_DEC;
        end
        S_ENC: st <= S_ENC_WAIT;
        S_ENC_WAIT: if (enc_done) begin
          rsp_rd <= XLEN'(enc_aux);
          st     <= S_RESP;
        end
        S_DEC: if (!dec_busy) st <= S_DEC_WAIT;
        S_DEC_WAIT: if (dec_done) begin
          if (dec_fail) begin
            rsp_err <= 1'b1;
            st      <= S_RESP;
          end else begin
            r2_q <= dec_r2;
            if (mode_q == E_HASH) st <= S_HASH;
            else begin
              rsp_rd <= XLEN'(dec_r2);
              st     <= S_RESP;
            end
          end
        end
        S_HASH: if (!h_busy) st <= S_HASH_WAIT;
        S_HASH_WAIT: if (h_done) begin
          rsp_rd <= h_digest[XLEN-1:0];
          st     <= S_RESP;
        end
        S_RESP: if (rsp_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // ---------------- handshake rules ----------------
  property p_rsp_hold;
    @(posedge clk) disable iff (!rst_n)
      rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp_rd) && $stable(rsp_err);
  endproperty
  a_rsp_hold: assert property (p_rsp_hold);

  a_one_at_a_time: assert property (@(posedge clk) disable iff (!rst_n) !(req_ready && rsp_valid));

endmodule
