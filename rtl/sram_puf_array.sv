// sram_puf_array -- behavioural model of a bank of SRAM PUFs.
//
// BEHAVIOURAL MODEL. An SRAM PUF derives its response from the power-up state
// of SRAM cells, which is fixed by manufacturing variation and not by logic,
// so it cannot be written as synthesizable RTL. This model stands in for the
// "PUFs" block with a PUF select input of the architecture: NUM_PUF instances,
// each answering a CW-bit challenge (read as the address of a group of cells)
// with an RW-bit raw response R1.
//
// Device uniqueness: the noise-free response of instance idx to challenge c is
// a fixed pseudo-random function of (SEED, idx, c) built from the splitmix64
// finaliser, so two models with different SEED behave like two chips.
// Noise: every read flips between 0 and NOISE_PER_BLK bits inside each
// BLKW-bit group of the response (positions may coincide), drawn from a
// counter-based generator, which mimics the unstable cells the fuzzy
// extractor has to correct. NOISE_PER_BLK = 0 gives a perfectly stable PUF.
//
// Interface and timing: a request is taken on a clock edge where req_valid
// and req_ready are both high; req_ready is low while a read is in flight.
// READ_LAT clock edges later rsp_valid is high for one cycle with rsp_r1.
// Latency, noise profile and seed are this design's assumptions; the paper
// gives no timing or error rate for the SRAM PUF it uses.
module sram_puf_array #(
  parameter int unsigned P_NUM_PUF     = puf_pkg::NUM_PUF,
  parameter int unsigned P_CW          = puf_pkg::CW,
  parameter int unsigned P_RW          = puf_pkg::RW,
  parameter int unsigned BLKW          = puf_pkg::BCH_N,
  parameter int unsigned NOISE_PER_BLK = 1,
  parameter int unsigned READ_LAT      = 4,
  parameter logic [63:0] SEED          = 64'h5EC0_2E0F_A11C_E5D1,
  localparam int unsigned P_IDXW       = (P_NUM_PUF > 1) ? $clog2(P_NUM_PUF) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [P_IDXW-1:0] req_idx,
  input  logic [P_CW-1:0]   req_chal,
  output logic              rsp_valid,
  output logic [P_RW-1:0]   rsp_r1
);

  localparam int unsigned NCHUNK = (P_RW + 63) / 64;
  localparam int unsigned NGRP   = (P_RW + BLKW - 1) / BLKW;

  function automatic logic [63:0] mix64(input logic [63:0] z0);
    logic [63:0] z;
    z = z0;
    z = (z ^ (z >> 30)) * 64'hBF58_476D_1CE4_E5B9;
    z = (z ^ (z >> 27)) * 64'h94D0_49BB_1331_11EB;
    return z ^ (z >> 31);
  endfunction

  // Noise-free (enrolled) power-up pattern
  function automatic logic [P_RW-1:0] fingerprint(input logic [P_IDXW-1:0] idx,
                                                  input logic [P_CW-1:0]   chal);
    logic [NCHUNK*64-1:0] fp;
    for (int k = 0; k < NCHUNK; k++)
      fp[k*64 +: 64] = mix64(mix64(SEED ^ 64'(chal)) ^ {16'(idx), 16'(k), 32'h9E37_79B9});
    return fp[P_RW-1:0];
  endfunction

  // Bit flips of one read, selected by the read counter
  function automatic logic [P_RW-1:0] noise(input logic [31:0] nread);
    logic [NGRP*BLKW-1:0] n;
    logic [63:0]          w;
    int unsigned          cnt;
    n = '0;
    for (int g = 0; g < NGRP; g++) begin
      w   = mix64(~SEED ^ {nread, 32'(g)});
      cnt = (NOISE_PER_BLK == 0) ? 0 : (32'(w[7:0]) % (NOISE_PER_BLK + 1));
      for (int j = 0; j < 7; j++)
        if (j < cnt) n[g*BLKW + 32'(w[8+8*j +: 8]) % BLKW] ^= 1'b1;
    end
    return n[P_RW-1:0];
  endfunction

  logic              busy;
  logic [15:0]       cnt_q;
  logic [P_IDXW-1:0] idx_q;
  logic [P_CW-1:0]   chal_q;
  logic [31:0]       nread_q;

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt_q     <= '0;
      idx_q     <= '0;
      chal_q    <= '0;
      nread_q   <= '0;
      rsp_valid <= 1'b0;
      rsp_r1    <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (busy) begin
        if (cnt_q == 16'd0) begin
          busy      <= 1'b0;
          rsp_valid <= 1'b1;
          rsp_r1    <= fingerprint(idx_q, chal_q) ^ noise(nread_q);
          nread_q   <= nread_q + 32'd1;
        end else begin
          cnt_q <= cnt_q - 16'd1;
        end
      end else if (req_valid) begin
        busy   <= 1'b1;
        cnt_q  <= 16'(READ_LAT - 1);
        idx_q  <= req_idx;
        chal_q <= req_chal;
      end
    end
  end

  initial begin
    assert (READ_LAT >= 1) else $error("READ_LAT must be at least 1");
    assert (NOISE_PER_BLK <= 7) else $error("NOISE_PER_BLK must be at most 7");
  end

endmodule
