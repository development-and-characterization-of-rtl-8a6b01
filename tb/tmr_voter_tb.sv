`timescale 1ps / 1fs
// tmr_voter_tb -- random and directed vectors for the 2-of-3 voter; the
// expected bit is the count of ones among the three inputs being >= 2.
module tmr_voter_tb;
  localparam int W = 37;
  logic [W-1:0] a, b, c, y;
  logic         mm;
  int checks = 0, failures = 0;

  tmr_voter #(.W(W)) dut (.a, .b, .c, .y, .mismatch(mm));

  task automatic check_vec();
    logic [W-1:0] exp;
    #1;
    for (int i = 0; i < W; i++) exp[i] = (int'(a[i]) + int'(b[i]) + int'(c[i])) >= 2;
    checks++;
    if (y !== exp) begin failures++; $display("FAIL y=%h exp=%h", y, exp); end
    checks++;
    if (mm !== !((a == b) && (b == c))) begin failures++; $display("FAIL mismatch"); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      a = {$urandom, $urandom}; b = {$urandom, $urandom}; c = {$urandom, $urandom};
      check_vec();
      // single upset: two copies agree, the third is corrupted
      b = a; c = a ^ (W'(1) << (n % W));
      check_vec();
      checks++; if (y !== a) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
