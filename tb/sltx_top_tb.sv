`timescale 1ps / 1fs
// sltx_top_tb -- end-to-end test of the whole transmitter at its default
// sizes. A 40 MHz reference starts the PLL; random 256-bit frames are
// offered on every rising edge of clk_10. A receiver model samples the
// sign of the differential line voltage in the middle of each bit (timed
// from the transmitter's 1.6 GHz clock, standing in for clock recovery),
// finds the header, checks both RS codewords of every frame by their
// syndromes, descrambles the payload and compares timestamp and data with
// what was offered. Along the way it switches pre-emphasis on
// (a0 = -0.2, the measured setting) and checks the line levels, upsets one
// copy of the timestamp, scrambler and frame registers, and forces a wrong
// word onto one of the three outputs before the final vote. Each of these
// mechanisms is counted and must occur at least once.
module sltx_top_tb;
  import sltx_pkg::*;
  import tb_ref_pkg::*;

  localparam int NFRAMES   = 40;          // frames to check
  localparam int MAXBITS   = (NFRAMES + 8) * FRAME_W;

  logic ref_clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a real falling edge, so the asynchronous resets act
  logic [RAW_W-1:0] raw_data = '0;
  logic [1:0] pll_bw_sel = 2'd3;
  logic signed [4:0] a0_code = 0, a1_code = 0;
  logic clk_10, pll_lock, tmr_mismatch;
  real  tx_p, tx_n;
  int checks = 0, failures = 0;

  sltx_top dut (
    .ref_clk, .rst_n, .raw_data, .pll_bw_sel, .a0_code, .a1_code,
    .clk_10, .pll_lock, .tmr_mismatch, .tx_p, .tx_n
  );

  always #12500 ref_clk = ~ref_clk;

  // mechanism counters
  int n_lock = 0, n_frames_ok = 0, n_ts_step = 0, n_emph_off = 0, n_emph_on = 0;
  int n_emph_boost = 0, n_seu_ts = 0, n_seu_scr = 0, n_seu_frame = 0, n_vote_out = 0;

  initial begin
    #60us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------- source: a new random frame on every clk_10 rising edge ---------
  logic [RAW_W-1:0] sent [$];
  always @(posedge clk_10)
    for (int i = 0; i < RAW_W / 32; i++) raw_data[i*32 +: 32] <= $urandom;
  // what the transmitter took in each frame step (index = timestamp)
  always @(posedge dut.clk_100)
    if (dut.core_rst_n && dut.frame_en) sent.push_back(raw_data);

  always @(posedge pll_lock) n_lock++;
  always @(posedge tmr_mismatch) n_vote_out++;

  // --------- receiver front end: one sample per bit ---------
  logic rx [$];
  function automatic real absr(real x); return x < 0.0 ? -x : x; endfunction
  always @(dut.clk_1g6) begin
    if (dut.core_rst_n && rx.size() < MAXBITS) begin
      #150;
      rx.push_back(tx_p > tx_n);
      if (a0_code == 0) begin
        if (absr(absr(tx_p - tx_n) - 0.4) < 1e-6) n_emph_off++;
        else begin checks++; failures++; end
      end else if (a0_code == -5'sd4 && a1_code == 0) begin
        if (absr(absr(tx_p - tx_n) - 0.48) < 1e-6) n_emph_boost++;
        else if (absr(absr(tx_p - tx_n) - 0.32) < 1e-6) n_emph_on++;
      end
    end
  end

  // --------- stimulus ---------
  int mech [10];
  initial begin
    repeat (3) @(posedge ref_clk);
    rst_n = 1;
    wait (dut.core_rst_n);
    repeat (8) @(posedge clk_10);
    // single event upsets, one register copy at a time, away from frame steps
    @(posedge dut.clk_100); #2000;
    dut.g_path[1].u_path.u_ts.ts_q = dut.g_path[1].u_path.u_ts.ts_q ^ 14'h2A5;
    n_seu_ts++;
    repeat (3) @(posedge clk_10);
    @(posedge dut.clk_100); #2000;
    dut.g_path[2].u_path.u_scr.scr_q = dut.g_path[2].u_path.u_scr.scr_q ^ 58'h3_0000_F000_0001;
    n_seu_scr++;
    repeat (3) @(posedge clk_10);
    @(posedge dut.clk_100); @(posedge dut.clk_100); #2000;
    dut.g_path[0].u_path.u_fb.frame_q = ~dut.g_path[0].u_path.u_fb.frame_q;
    n_seu_frame++;
    repeat (3) @(posedge clk_10);
    // a transient on the combinational output of one copy
    @(posedge dut.clk_100); #2000;
    force dut.g_path[2].u_path.word = 32'hDEAD_BEEF;
    repeat (3) @(posedge dut.clk_100);
    #2000 release dut.g_path[2].u_path.word;
    repeat (3) @(posedge clk_10);
    // copies agree again
    checks++;
    if (dut.st[0] !== dut.st[1] || dut.st[1] !== dut.st[2]) begin
      failures++; $display("FAIL register copies still differ");
    end
    // pre-emphasis on, as in the measured eye diagram
    a0_code = -5'sd4;
    wait (rx.size() >= MAXBITS);
    analyse();
    $display("lock=%0d frames_ok=%0d ts_steps=%0d emph_off=%0d emph_on=%0d/%0d seu ts/scr/frame=%0d/%0d/%0d out_vote=%0d",
             n_lock, n_frames_ok, n_ts_step, n_emph_off, n_emph_on, n_emph_boost,
             n_seu_ts, n_seu_scr, n_seu_frame, n_vote_out);
    mech = '{n_lock, n_frames_ok, n_ts_step, n_emph_off, n_emph_on, n_emph_boost,
             n_seu_ts, n_seu_scr, n_seu_frame, n_vote_out};
    foreach (mech[i]) begin
      checks++;
      if (mech[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------- receiver back end ---------
  task automatic analyse();
    int start = -1;
    logic [FRAME_W-1:0] fr;
    logic [57:0] dst;
    int prev_ts = -1;
    int nfr = 0;
    // first position where a header starts a frame with valid codewords
    for (int o = 0; o + FRAME_W <= rx.size() && start < 0; o++) begin
      for (int b = 0; b < FRAME_W; b++) fr[FRAME_W-1-b] = rx[o+b];
      if (fr[FRAME_W-1 -: HDR_W] == 10'b0011111010 && frame_ok(fr)) start = o;
    end
    checks++;
    if (start < 0) begin failures++; $display("FAIL no frame found"); return; end
    dst = '0;
    for (int o = start; o + FRAME_W <= rx.size(); o += FRAME_W) begin
      logic [PAYLOAD_W-1:0] pl;
      int ts;
      for (int b = 0; b < FRAME_W; b++) fr[FRAME_W-1-b] = rx[o+b];
      checks += 2;
      if (fr[FRAME_W-1 -: HDR_W] != 10'b0011111010) begin failures++; $display("FAIL header at frame %0d", nfr); end
      if (!frame_ok(fr)) begin failures++; $display("FAIL RS syndromes at frame %0d", nfr); end
      for (int b = PAYLOAD_W - 1; b >= 0; b--) pl[b] = descr_bit(dst, fr[PARITY_W + b]);
      ts = int'(pl[PAYLOAD_W-1 -: TS_W]);
      if (nfr > 0) begin   // the descrambler has synchronised after frame 0
        checks += 2;
        if (prev_ts >= 0 && ts != prev_ts + 1) begin failures++; $display("FAIL ts %0d after %0d", ts, prev_ts); end
        else n_ts_step++;
        if (ts >= sent.size() || pl[RAW_W-1:0] !== sent[ts]) begin
          failures++; $display("FAIL data of frame ts=%0d", ts);
        end else n_frames_ok++;
      end
      prev_ts = ts;
      nfr++;
    end
    checks++;
    if (nfr < NFRAMES) begin failures++; $display("FAIL only %0d frames", nfr); end
  endtask

  function automatic bit frame_ok(logic [FRAME_W-1:0] fr);
    sym_t cw [31];
    for (int c = 0; c < 2; c++) begin
      for (int n = 0; n < 27; n++) cw[n] = fr[PARITY_W + PAYLOAD_W - 1 - 5*(2*n+c) -: 5];
      for (int p = 0; p < 4; p++) cw[27+p] = fr[PARITY_W - 1 - 5*(2*p+c) -: 5];
      if (!rs_check(cw)) return 1'b0;
    end
    return 1'b1;
  endfunction
endmodule
