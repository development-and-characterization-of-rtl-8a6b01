`timescale 1ps / 1fs
// rs_encoder_core -- parallel systematic RS(31,27) encoder over GF(2^5).
//
// Takes 27 five-bit data symbols (135 bits, din[134:130] is the first and
// highest-degree symbol) and returns the 4 parity symbols (20 bits,
// parity[19:15] first) of the code with generator
//   g(x) = (x - a^27)(x - a^28)(x - a^29)(x - a^30).
// The paper's conventional encoder is an LFSR b1..b4 clocked once per
// symbol with feedback (input ^ b4) multiplied by g1..g4; here the 27 LFSR
// steps are unrolled into combinational logic so the whole codeword is done
// in one frame clock, as in the paper's parallel version. The coefficients
// are computed at elaboration from g(x). Field polynomial x^5 + x^2 + 1 is
// this design's choice (the paper does not state it).
module rs_encoder_core
  import sltx_pkg::*;
(
  input  logic [RS_DATA_W-1:0]    din,
  output logic [RS_PAR*SYM_W-1:0] parity
);
  localparam gf_t G1 = rs_gen_coef(1);
  localparam gf_t G2 = rs_gen_coef(2);
  localparam gf_t G3 = rs_gen_coef(3);
  localparam gf_t G4 = rs_gen_coef(4);

  always_comb begin
    gf_t b1, b2, b3, b4, fb;
    b1 = '0; b2 = '0; b3 = '0; b4 = '0;
    for (int i = RS_K - 1; i >= 0; i--) begin
      fb = din[i*SYM_W +: SYM_W] ^ b4;
      b4 = b3 ^ gf_mul(fb, G4);
      b3 = b2 ^ gf_mul(fb, G3);
      b2 = b1 ^ gf_mul(fb, G2);
      b1 = gf_mul(fb, G1);
    end
    parity = {b4, b3, b2, b1};
  end
endmodule
