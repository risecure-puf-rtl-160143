// puf_challenge_mux -- selects the challenge applied to the PUF array.
//
// Combinational. Driven by the output selector E[1:0]:
//   E = 00 (strong PUF, output R1): the outer challenge C goes to the PUF;
//   E = 01 (weak PUF, output R2):   neither C nor C0 is used, the PUF is read
//                                   at the fixed challenge WEAK_CHAL;
//   E = 10 (hashed, output R3):     the inner challenge C0 goes to the PUF,
//                                   C is kept for the hash;
//   E = 11 (reserved):              WEAK_CHAL.
// The two data inputs and the 2-bit select are drawn in the paper's
// architecture figure and the use of C and C0 per mode follows its output
// mapping table. Reading the weak PUF at a fixed challenge, and its value, are
// this design's choice.
module puf_challenge_mux #(
  parameter int unsigned      P_CW      = puf_pkg::CW,
  parameter logic [P_CW-1:0]  WEAK_CHAL = '0
) (
  input  puf_pkg::puf_mode_e  e,
  input  logic [P_CW-1:0]     c,
  input  logic [P_CW-1:0]     c0,
  output logic [P_CW-1:0]     puf_chal
);

  always_comb begin
    unique case (e)
      puf_pkg::E_STRONG: puf_chal = c;
      puf_pkg::E_HASH:   puf_chal = c0;
      default:           puf_chal = WEAK_CHAL;
    endcase
  end

endmodule
