`timescale 1ps / 1fs
// timestamp_tb -- checks that the payload is {timestamp, raw data}, that the
// timestamp counts frames and wraps at 2^14, that it ignores non-frame
// cycles, and that the locally voted register follows two agreeing peer
// copies (an upset in its own copy is repaired).
module timestamp_tb;
  import sltx_pkg::*;
  logic clk = 0, rst_n = 1, frame_en = 0;
  initial #1 rst_n = 1'b0;   // a real falling edge, so the asynchronous resets act
  logic [RAW_W-1:0] raw;
  logic [TS_W-1:0]  peer_a, peer_b, ts_q;
  logic [PAYLOAD_W-1:0] payload;
  logic use_own = 1;
  int checks = 0, failures = 0;
  int unsigned exp_ts = 0;

  assign peer_a = use_own ? ts_q : 14'h1234;
  assign peer_b = use_own ? ts_q : 14'h1234;

  timestamp dut (.clk, .rst_n, .frame_en, .raw_data(raw), .peer_a, .peer_b, .ts_q, .payload);

  always #5000 clk = ~clk;

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < RAW_W / 32; i++) raw[i*32 +: 32] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 16500; f++) begin
      for (int k = 0; k < 10; k++) begin
        @(negedge clk);
        frame_en = (k == 9);
        if (k == 9) begin
          if (f % 97 == 0) for (int i = 0; i < RAW_W / 32; i++) raw[i*32 +: 32] = $urandom;
          #1;
          checks++;
          if (payload !== {exp_ts[TS_W-1:0], raw}) begin
            failures++;
            if (failures < 10) $display("FAIL frame %0d ts=%h exp=%h", f, payload[269:256], exp_ts[13:0]);
          end
          exp_ts = (exp_ts + 1) % (1 << TS_W);
        end
      end
    end
    @(negedge clk) frame_en = 0;
    checks++; if (ts_q !== exp_ts[TS_W-1:0]) failures++;
    // two peers agree on another value: the vote takes it over
    use_own = 0;
    @(negedge clk);
    #1 checks++; if (payload[269:256] !== 14'h1234) failures++;
    frame_en = 1;
    @(negedge clk); frame_en = 0; use_own = 1;
    #1 checks++; if (ts_q !== 14'h1235) begin failures++; $display("FAIL vote %h", ts_q); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
