`timescale 1ps / 1fs
// rs_encoder -- interleaved Reed-Solomon encoder of the 270-bit payload.
//
// Two identical RS(31,27) encoders (rs_encoder_core) each protect 135 bits,
// as in the paper, and together add 40 parity bits: dout = {din, parity},
// 310 bits. Interleaving is by symbol (this design's reading of the paper's
// "interleaved encoding scheme"): the payload is cut into 54 five-bit symbols,
// symbol 0 = din[269:265] being sent first; even symbols go to encoder A, odd
// ones to encoder B. The 8 parity symbols are sent alternately A, B, A, B,
// highest-degree first. A burst of up to 16 bits then touches at most four
// adjacent symbols, two per code, which each code (t = 2) still corrects.
//
// Purely combinational, evaluated once per 10 MHz frame.
module rs_encoder
  import sltx_pkg::*;
(
  input  logic [PAYLOAD_W-1:0] din,
  output logic [CODED_W-1:0]   dout
);

  logic [RS_DATA_W-1:0]    din_a, din_b;
  logic [RS_PAR*SYM_W-1:0] par_a, par_b;
  logic [PARITY_W-1:0]     parity;

  // Payload symbol s (s = 0 first) sits at din[PAYLOAD_W-1-5s -: 5].
  // Encoder data symbol j (j = 0 first) sits at din_x[RS_DATA_W-1-5j -: 5].
  always_comb begin
    for (int j = 0; j < RS_K; j++) begin
      din_a[RS_DATA_W-1-SYM_W*j -: SYM_W] = din[PAYLOAD_W-1-SYM_W*(2*j)   -: SYM_W];
      din_b[RS_DATA_W-1-SYM_W*j -: SYM_W] = din[PAYLOAD_W-1-SYM_W*(2*j+1) -: SYM_W];
    end
    for (int j = 0; j < RS_PAR; j++) begin
      parity[PARITY_W-1-SYM_W*(2*j)   -: SYM_W] = par_a[RS_PAR*SYM_W-1-SYM_W*j -: SYM_W];
      parity[PARITY_W-1-SYM_W*(2*j+1) -: SYM_W] = par_b[RS_PAR*SYM_W-1-SYM_W*j -: SYM_W];
    end
  end

  rs_encoder_core u_enc_a (.din(din_a), .parity(par_a));
  rs_encoder_core u_enc_b (.din(din_b), .parity(par_b));

  assign dout = {din, parity};
endmodule
