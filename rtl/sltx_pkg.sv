`timescale 1ps / 1fs
// sltx_pkg -- widths, frame layout, GF(2^5) arithmetic and the shared
// triplicated-state record of the 3.2 Gb/s serial link transmitter.
//
// Frame (320 bits, sent most significant bit first, one frame per 100 ns):
//   [319:310] header (10 bit)
//   [309:40]  scrambled payload (270 bit = 14-bit timestamp + 256-bit raw data)
//   [39:0]    Reed-Solomon parity (two interleaved RS(31,27) codes, 4 x 5 bit each)
// The field widths and the order header / timestamp / data / parity follow
// the paper's frame definition. The header value, the GF(32) field
// polynomial and the interleaving order are this design's own choices.
package sltx_pkg;

  localparam int unsigned RAW_W     = 256;  // raw frame data from the sensor memory
  localparam int unsigned TS_W      = 14;   // timestamp
  localparam int unsigned PAYLOAD_W = RAW_W + TS_W;       // 270
  localparam int unsigned SYM_W     = 5;    // RS symbol width
  localparam int unsigned RS_N      = 31;
  localparam int unsigned RS_K      = 27;
  localparam int unsigned RS_PAR    = RS_N - RS_K;        // 4 parity symbols
  localparam int unsigned RS_IL     = 2;    // interleaved encoders
  localparam int unsigned RS_DATA_W = RS_K * SYM_W;       // 135 bits per encoder
  localparam int unsigned PARITY_W  = RS_IL * RS_PAR * SYM_W;  // 40
  localparam int unsigned CODED_W   = PAYLOAD_W + PARITY_W;    // 310
  localparam int unsigned HDR_W     = 10;
  localparam int unsigned FRAME_W   = HDR_W + CODED_W;         // 320
  localparam int unsigned WORD_W    = 32;   // frame builder -> serializer
  localparam int unsigned WORDS_PER_FRAME = FRAME_W / WORD_W;  // 10
  localparam int unsigned SCR_W     = 58;   // scrambler state, x^58 + x^39 + 1
  localparam int unsigned SCR_TAP   = 39;

  // Frame header. Not given in the paper: a comma-like 10-bit pattern.
  localparam logic [HDR_W-1:0] HEADER = 10'b0011111010;

  // GF(2^5) field polynomial x^5 + x^2 + 1 (primitive). Not given in the paper.
  localparam logic [SYM_W:0] GF_POLY = 6'b100101;

  typedef logic [SYM_W-1:0] gf_t;

  // General GF(32) product (shift-and-add). With one constant operand
  // it reduces to a small XOR network.
  function automatic gf_t gf_mul(gf_t a, gf_t b);
    logic [SYM_W-1:0] acc;
    logic [SYM_W-1:0] x;
    acc = '0;
    x   = a;
    for (int i = 0; i < SYM_W; i++) begin
      if (b[i]) acc = acc ^ x;
      x = x[SYM_W-1] ? ((x << 1) ^ GF_POLY[SYM_W-1:0]) : (x << 1);
    end
    return acc;
  endfunction

  // alpha^e, alpha = 2
  function automatic gf_t gf_alpha_pow(int unsigned e);
    gf_t r;
    r = 5'd1;
    for (int unsigned i = 0; i < e; i++) r = gf_mul(r, 5'd2);
    return r;
  endfunction

  // Coefficient g_j (j = 1..4) of
  //   g(x) = (x - a^27)(x - a^28)(x - a^29)(x - a^30) = x^4 + g4 x^3 + g3 x^2 + g2 x + g1
  // g1 is the constant term; this matches the tap order of the serial encoder
  // (g1 feeds register b1, g4 feeds b4 next to the output).
  function automatic gf_t rs_gen_coef(int unsigned j);
    gf_t p [RS_PAR+1];
    gf_t r;
    for (int i = 0; i <= RS_PAR; i++) p[i] = '0;
    p[0] = 5'd1;
    for (int unsigned k = 0; k < RS_PAR; k++) begin
      r = gf_alpha_pow(RS_N - RS_PAR + k);   // 27, 28, 29, 30
      for (int i = RS_PAR; i >= 1; i--) p[i] = p[i-1] ^ gf_mul(r, p[i]);
      p[0] = gf_mul(r, p[0]);
    end
    return p[j-1];
  endfunction

  // Every register of one processing path. Each of the three paths holds
  // one copy; a register is voted against the copies of the other two paths.
  typedef struct packed {
    logic [TS_W-1:0]    ts;     // timestamp counter
    logic [SCR_W-1:0]   scr;    // scrambler state
    logic [FRAME_W-1:0] frame;  // frame shift register of the frame builder
  } path_state_t;

endpackage
