`timescale 1ps / 1fs
// rs_encoder_tb -- for random and directed payloads: the data passes
// unchanged, each of the two symbol-interleaved codewords (even payload
// symbols + even parity symbols, odd + odd) has zero syndromes at
// a^27..a^30, and the parity equals that of the serial shift-register
// encoder of tb_ref_pkg. A corrupted symbol must make a syndrome non-zero.
module rs_encoder_tb;
  import sltx_pkg::*;
  import tb_ref_pkg::*;
  logic [PAYLOAD_W-1:0] din;
  logic [CODED_W-1:0]   dout;
  int checks = 0, failures = 0;

  rs_encoder dut (.din, .dout);

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one();
    sym_t data [2][27];
    sym_t par  [2][4];
    sym_t cw   [31];
    #1;
    checks++;
    if (dout[CODED_W-1 -: PAYLOAD_W] !== din) failures++;
    for (int s = 0; s < 54; s++) data[s % 2][s / 2] = din[PAYLOAD_W-1-5*s -: 5];
    for (int c = 0; c < 2; c++) begin
      rs_encode(data[c], par[c]);
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (dout[PARITY_W-1-5*(2*p+c) -: 5] !== par[c][p]) begin
          failures++;
          if (failures < 10) $display("FAIL code %0d parity %0d: %h exp %h", c, p,
                                       dout[PARITY_W-1-5*(2*p+c) -: 5], par[c][p]);
        end
      end
      for (int n = 0; n < 27; n++) cw[n] = data[c][n];
      for (int p = 0; p < 4; p++) cw[27+p] = dout[PARITY_W-1-5*(2*p+c) -: 5];
      checks++;
      if (!rs_check(cw)) begin failures++; $display("FAIL syndromes code %0d", c); end
      cw[$urandom_range(0, 30)] ^= 5'($urandom_range(1, 31));
      checks++;
      if (rs_check(cw)) begin failures++; $display("FAIL error not detected"); end
    end
  endtask

  initial begin
    din = '0;                       check_one();
    din = '1;                       check_one();
    din = '0; din[0] = 1'b1;        check_one();
    din = '0; din[PAYLOAD_W-1] = 1; check_one();
    for (int n = 0; n < 100; n++) begin
      for (int i = 0; i < PAYLOAD_W; i++) din[i] = $urandom_range(0, 1);
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
