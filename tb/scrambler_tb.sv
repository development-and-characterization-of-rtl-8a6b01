`timescale 1ps / 1fs
// scrambler_tb -- compares the 270-bit parallel scrambler, frame after
// frame, with the bit-serial shift-register scrambler of tb_ref_pkg fed the
// same bits in the same order (bit 269 first), checks that the serial
// descrambler restores the data (also when it starts from a wrong state:
// self-synchronisation after 58 bits), and that the state register follows
// two agreeing peer copies.
module scrambler_tb;
  import sltx_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 1, frame_en = 0;
  initial #1 rst_n = 1'b0;   // a real falling edge, so the asynchronous resets act
  logic [PAYLOAD_W-1:0] din, dout;
  logic [SCR_W-1:0] scr_q, peer_a, peer_b;
  logic use_own = 1;
  logic [SCR_W-1:0] forced;
  int checks = 0, failures = 0;
  logic [57:0] ref_st, dsc_st;

  assign peer_a = use_own ? scr_q : forced;
  assign peer_b = use_own ? scr_q : forced;

  scrambler dut (.clk, .rst_n, .frame_en, .din, .peer_a, .peer_b, .scr_q, .dout);

  always #5000 clk = ~clk;

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one_frame(input bit check_descr);
    logic [PAYLOAD_W-1:0] exp, rec;
    for (int i = 0; i < PAYLOAD_W; i++) din[i] = $urandom_range(0, 1);
    if ($urandom_range(0, 7) == 0) din = '0;    // long runs of zeros too
    for (int i = PAYLOAD_W - 1; i >= 0; i--) exp[i] = scr_bit(ref_st, din[i]);
    #1;
    for (int i = PAYLOAD_W - 1; i >= 0; i--) rec[i] = descr_bit(dsc_st, dout[i]);
    checks++;
    if (dout !== exp) begin failures++; $display("FAIL scrambled frame differs"); end
    if (check_descr) begin
      checks++;
      if (rec !== din) begin failures++; $display("FAIL descrambled frame differs"); end
    end
    frame_en = 1;
    @(negedge clk) frame_en = 0;
  endtask

  initial begin
    din = '0;
    ref_st = '1;          // reset state of the RTL
    dsc_st = 58'h0;       // descrambler deliberately out of sync
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    one_frame(0);         // descrambler synchronises on this frame
    for (int n = 0; n < 200; n++) begin
      one_frame(1);
      @(negedge clk);     // non-frame cycles must not move the state
    end
    // two peers agree on another state: the vote takes it over
    forced = {$urandom, $urandom};
    use_own = 0;
    @(negedge clk);
    use_own = 1;
    ref_st = forced;
    dsc_st = forced;      // the receiver sees the new state as history
    #1 checks++; if (scr_q !== forced) failures++;
    for (int n = 0; n < 5; n++) one_frame(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
