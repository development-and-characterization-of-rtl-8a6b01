`timescale 1ps / 1fs
// link_error_tb -- the error-injection experiment: the complete transmitter
// at its default sizes sends frames; a receiver model adds errors to the
// received bits, as a marginal optical link would, and then decodes. Its
// RS(31,27) decoder (syndromes, then a search over one and two error
// positions, table-based GF(32)) works on each of the two interleaved
// codes, after which the payload is descrambled and compared with what was
// sent. Per frame one of these is applied, chosen at random:
//   none; 1 to 2 random bit errors; a burst of up to 16 bits; three symbol
//   errors in one code (beyond the correction limit).
// Checks: every frame with up to two bad symbols per code is restored
// exactly, and every frame with errors shows non-zero syndromes. Reported
// like the three counters of a link test: frames received with errors,
// frames found uncorrectable, and payloads still wrong after decoding.
module link_error_tb;
  import sltx_pkg::*;
  import tb_ref_pkg::*;

  localparam int NFRAMES = 60;
  localparam int MAXBITS = (NFRAMES + 6) * FRAME_W;

  logic ref_clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a real falling edge, so the asynchronous resets act
  logic [RAW_W-1:0] raw_data = '0;
  logic clk_10, pll_lock, tmr_mismatch;
  real  tx_p, tx_n;
  int checks = 0, failures = 0;

  sltx_top dut (
    .ref_clk, .rst_n, .raw_data, .pll_bw_sel(2'd3), .a0_code(5'sd0), .a1_code(5'sd0),
    .clk_10, .pll_lock, .tmr_mismatch, .tx_p, .tx_n
  );

  always #12500 ref_clk = ~ref_clk;

  initial begin
    #80us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [RAW_W-1:0] sent [$];
  always @(posedge clk_10)
    for (int i = 0; i < RAW_W / 32; i++) raw_data[i*32 +: 32] <= $urandom;
  always @(posedge dut.clk_100)
    if (dut.core_rst_n && dut.frame_en) sent.push_back(raw_data);

  logic rx [$];
  always @(dut.clk_1g6)
    if (dut.core_rst_n && rx.size() < MAXBITS) begin
      #150;
      rx.push_back(tx_p > tx_n);
    end

  // ---------------- GF(32) tables and decoder ----------------
  sym_t EXP [62];
  int   LOG [32];
  initial begin
    automatic sym_t v = 5'd1;
    for (int e = 0; e < 62; e++) begin
      EXP[e] = v;
      if (e < 31) LOG[v] = e;
      v = {v[3:0], 1'b0} ^ (v[4] ? 5'b00101 : 5'b00000);
    end
    LOG[0] = -1;
  end
  function automatic sym_t fm(sym_t a, sym_t b);
    if (a == 0 || b == 0) return 0;
    return EXP[LOG[a] + LOG[b]];
  endfunction
  function automatic sym_t fdiv(sym_t a, sym_t b);
    if (a == 0) return 0;
    return EXP[(LOG[a] - LOG[b] + 31) % 31];
  endfunction
  function automatic sym_t fpow(int e);
    return EXP[e % 31];
  endfunction

  // cw[0] is the x^30 coefficient. Returns 0 clean, 1 corrected, 2 failed.
  function automatic int rs_decode(inout sym_t cw [31]);
    sym_t s [4];
    bit   zero = 1;
    for (int j = 0; j < 4; j++) begin
      s[j] = 0;
      for (int n = 0; n < 31; n++) s[j] ^= fm(cw[n], fpow((27 + j) * (30 - n)));
      if (s[j] != 0) zero = 0;
    end
    if (zero) return 0;
    // with X = a^p, Y' = Y X^27: s[j] = sum Y' X^j
    for (int p = 0; p < 31; p++) begin                 // one error
      sym_t x = fpow(p);
      if (s[0] != 0 && fm(s[0], x) == s[1] && fm(s[1], x) == s[2] && fm(s[2], x) == s[3]) begin
        cw[30 - p] ^= fdiv(s[0], fpow(27 * p));
        return 1;
      end
    end
    for (int p1 = 0; p1 < 31; p1++)                    // two errors
      for (int p2 = p1 + 1; p2 < 31; p2++) begin
        sym_t x1 = fpow(p1), x2 = fpow(p2), y1, y2;
        y2 = fdiv(s[1] ^ fm(s[0], x1), x1 ^ x2);
        y1 = s[0] ^ y2;
        if (y1 != 0 && y2 != 0 &&
            (fm(y1, fm(x1, x1)) ^ fm(y2, fm(x2, x2))) == s[2] &&
            (fm(y1, fm(x1, fm(x1, x1))) ^ fm(y2, fm(x2, fm(x2, x2)))) == s[3]) begin
          cw[30 - p1] ^= fdiv(y1, fpow(27 * p1));
          cw[30 - p2] ^= fdiv(y2, fpow(27 * p2));
          return 1;
        end
      end
    return 2;
  endfunction

  // bit position inside the 310 coded bits (0 = first sent after the header)
  // -> code c and symbol n of that code (0 = x^30)
  function automatic void locate(int pos, output int c, output int n);
    int s;
    if (pos < PAYLOAD_W) begin s = pos / 5; c = s % 2; n = s / 2; end
    else begin s = (pos - PAYLOAD_W) / 5; c = s % 2; n = 27 + s / 2; end
  endfunction

  function automatic bit frame_clean(logic [CODED_W-1:0] cd);
    sym_t cw [31];
    for (int i = 0; i < 2; i++) begin
      for (int j = 0; j < 27; j++) cw[j] = cd[PARITY_W + PAYLOAD_W - 1 - 5*(2*j+i) -: 5];
      for (int j = 0; j < 4; j++) cw[27+j] = cd[PARITY_W - 1 - 5*(2*j+i) -: 5];
      if (rs_decode(cw) != 0) return 1'b0;
    end
    return 1'b1;
  endfunction

  int n_err_frames = 0, n_uncorrectable = 0, n_bad_payload = 0, n_corrected = 0;
  int n_mode [4] = '{0, 0, 0, 0};

  initial begin
    automatic int start = -1;
    logic [FRAME_W-1:0] fr;
    logic [57:0] dst;
    automatic int nfr = 0;
    automatic bit skip_next = 0;
    repeat (3) @(posedge ref_clk);
    rst_n = 1;
    wait (rx.size() >= MAXBITS);
    for (int o = 0; o + FRAME_W <= rx.size() && start < 0; o++) begin
      for (int b = 0; b < FRAME_W; b++) fr[FRAME_W-1-b] = rx[o+b];
      if (fr[FRAME_W-1 -: HDR_W] == HEADER && frame_clean(fr[CODED_W-1:0])) start = o;
    end
    checks++;
    if (start < 0) begin failures++; $display("FAIL no frame found"); end
    dst = '0;
    for (int o = start; start >= 0 && o + FRAME_W <= rx.size(); o += FRAME_W) begin
      logic [CODED_W-1:0] cd;
      logic [CODED_W-1:0] orig;
      logic [PAYLOAD_W-1:0] pl;
      sym_t cw [2][31];
      int bad [2][31];
      int mode, res [2], ts, c, n;
      bit correctable;
      for (int b = 0; b < FRAME_W; b++) fr[FRAME_W-1-b] = rx[o+b];
      cd = fr[CODED_W-1:0];
      orig = cd;
      // ---- the channel ----
      mode = (nfr == 0) ? 0 : $urandom_range(0, 3);
      n_mode[mode]++;
      case (mode)
        1: repeat ($urandom_range(1, 2)) cd[$urandom_range(0, CODED_W-1)] ^= 1'b1;
        2: begin
             automatic int len = $urandom_range(2, 16), at = $urandom_range(0, CODED_W - 16);
             for (int k = 0; k < len; k++) cd[CODED_W-1-(at+k)] ^= 1'b1;
           end
        3: begin   // three symbols of code 0
             automatic int s0 = $urandom_range(0, 8);
             for (int k = 0; k < 3; k++) cd[CODED_W-1-5*(2*(s0 + 3*k))] ^= 1'b1;
           end
        default: ;
      endcase
      // which symbols of which code are hit
      for (int i = 0; i < 2; i++) for (int j = 0; j < 31; j++) bad[i][j] = 0;
      for (int b = 0; b < CODED_W; b++)
        if (cd[CODED_W-1-b] !== orig[CODED_W-1-b]) begin locate(b, c, n); bad[c][n] = 1; end
      correctable = 1;
      for (int i = 0; i < 2; i++) begin
        automatic int cnt = 0;
        for (int j = 0; j < 31; j++) cnt += bad[i][j];
        if (cnt > 2) correctable = 0;
      end
      if (cd !== orig) n_err_frames++;
      // ---- the receiver ----
      for (int i = 0; i < 2; i++) begin
        for (int j = 0; j < 27; j++) cw[i][j] = cd[PARITY_W + PAYLOAD_W - 1 - 5*(2*j+i) -: 5];
        for (int j = 0; j < 4; j++) cw[i][27+j] = cd[PARITY_W - 1 - 5*(2*j+i) -: 5];
        res[i] = rs_decode(cw[i]);
        for (int j = 0; j < 27; j++) cd[PARITY_W + PAYLOAD_W - 1 - 5*(2*j+i) -: 5] = cw[i][j];
      end
      if (res[0] == 2 || res[1] == 2) n_uncorrectable++;
      if (res[0] == 1 || res[1] == 1) n_corrected++;
      checks++;
      if ((res[0] == 0 && res[1] == 0) != (bad[0].sum() == 0 && bad[1].sum() == 0)) begin
        failures++; $display("FAIL frame %0d: syndromes do not match the injected errors", nfr);
      end
      for (int b = PAYLOAD_W - 1; b >= 0; b--) pl[b] = descr_bit(dst, cd[PARITY_W + b]);
      ts = int'(pl[PAYLOAD_W-1 -: TS_W]);
      if (nfr > 0 && !skip_next) begin
        automatic bit ok = (ts < sent.size()) && (pl[RAW_W-1:0] === sent[ts]);
        if (!ok) n_bad_payload++;
        if (correctable) begin
          checks++;
          if (!ok) begin failures++; $display("FAIL frame %0d (mode %0d) not restored", nfr, mode); end
        end
      end
      skip_next = !correctable;   // the descrambler carries wrong bits for 58 bits
      nfr++;
    end
    $display("frames %0d: clean %0d, bit errors %0d, bursts %0d, 3-symbol %0d", nfr, n_mode[0], n_mode[1], n_mode[2], n_mode[3]);
    $display("received with errors %0d, corrected %0d, uncorrectable %0d, wrong payload after decoding %0d",
             n_err_frames, n_corrected, n_uncorrectable, n_bad_payload);
    checks += 4;
    if (n_mode[1] == 0 || n_mode[2] == 0 || n_mode[3] == 0) failures++;
    if (n_corrected == 0) failures++;
    if (nfr < NFRAMES) failures++;
    if (n_err_frames == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
