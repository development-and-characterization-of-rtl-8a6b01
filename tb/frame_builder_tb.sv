`timescale 1ps / 1fs
// frame_builder_tb -- loads random 310-bit coded frames every ten 100 MHz
// cycles and checks that the ten following words are the header plus the
// coded frame, most significant word first, one word per cycle; also that a
// frame register copy outvoted by two agreeing peers is replaced.
module frame_builder_tb;
  import sltx_pkg::*;
  logic clk = 0, rst_n = 1, frame_en = 0;
  initial #1 rst_n = 1'b0;   // a real falling edge, so the asynchronous resets act
  logic [CODED_W-1:0] coded;
  logic [FRAME_W-1:0] frame_q, peer_a, peer_b, forced;
  logic [WORD_W-1:0]  word;
  logic use_own = 1;
  int checks = 0, failures = 0;

  assign peer_a = use_own ? frame_q : forced;
  assign peer_b = use_own ? frame_q : forced;

  frame_builder dut (.clk, .rst_n, .frame_en, .coded, .peer_a, .peer_b, .frame_q, .word);

  always #5000 clk = ~clk;

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [FRAME_W-1:0] exp;
    coded = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 50; f++) begin
      for (int i = 0; i < CODED_W; i++) coded[i] = $urandom_range(0, 1);
      exp = {10'b0011111010, coded};
      frame_en = 1;
      @(negedge clk) frame_en = 0;
      coded = ~coded;               // must not matter after the load
      for (int k = 0; k < 10; k++) begin
        checks++;
        if (word !== exp[FRAME_W-1-32*k -: 32]) begin
          failures++;
          if (failures < 10) $display("FAIL frame %0d word %0d: %h exp %h", f, k, word, exp[FRAME_W-1-32*k -: 32]);
        end
        if (k < 9) @(negedge clk);
      end
    end
    for (int i = 0; i < FRAME_W; i++) forced[i] = $urandom_range(0, 1);
    use_own = 0;
    #1 checks++; if (word !== forced[FRAME_W-1 -: 32]) failures++;
    @(negedge clk) use_own = 1;
    #1 checks++; if (word !== forced[FRAME_W-33 -: 32]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
