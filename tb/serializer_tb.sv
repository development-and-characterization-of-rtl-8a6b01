`timescale 1ps / 1fs
// serializer_tb -- drives 32-bit words at 100 MHz with ideally aligned
// 1.6 GHz / 800 / 400 / 200 / 100 MHz clocks, samples d0, d1, d2 in the
// middle of every 312.5 ps bit, and checks that d0 carries the words MSB
// first back to back (32 bits per 10 ns word period = 3.2 Gb/s) at a fixed
// latency, that d1 and d2 are d0 delayed by one and two bits, and that d_n
// is the complement of d_p.
module serializer_tb;
  import sltx_pkg::*;
  localparam int NW = 200;
  localparam realtime HALF = 312.5;   // ps, half period of 1.6 GHz = one bit
  logic [4:0] p = '0;
  logic clk_1g6, clk_800, clk_400, clk_200, clk_100;
  logic rst_n = 1;
  initial #1 rst_n = 1'b0;   // a real falling edge, so the asynchronous resets act
  logic [31:0] din = '0;
  logic [2:0] d_p, d_n;
  logic [31:0] words [NW];
  logic [NW*32+200-1:0] stream;   // bit k = k-th sampled bit
  logic s1 [$];
  logic s2 [$];
  int nbits = 0;
  int checks = 0, failures = 0;

  assign clk_1g6 = ~p[0];
  assign clk_800 = ~p[1];
  assign clk_400 = ~p[2];
  assign clk_200 = ~p[3];
  assign clk_100 = ~p[4];

  serializer dut (.rst_n, .clk_1g6, .clk_800, .clk_400, .clk_200, .clk_100, .din, .d_p, .d_n);

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // all clocks from one counter so the edges coincide exactly
  initial forever begin
    #(HALF) p = p + 1'b1;
  end

  // one sample per bit, in the middle of the bit
  initial begin
    #(HALF / 2.0);
    forever begin
      #(HALF);
      if (rst_n && nbits < $bits(stream)) begin
        stream[nbits] = d_p[0];
        s1.push_back(d_p[1]);
        s2.push_back(d_p[2]);
        nbits++;
        checks++;
        if (d_n !== ~d_p) failures++;
      end
    end
  end

  initial begin
    int off;
    bit ok;
    for (int i = 0; i < NW; i++) words[i] = $urandom;
    words[0] = 32'hFFFF_0000;   // recognisable first word
    repeat (3) @(posedge clk_100);
    rst_n = 1;
    for (int i = 0; i < NW; i++) begin
      @(posedge clk_100);
      din <= words[i];
    end
    @(posedge clk_100) din <= '0;
    repeat (10) @(posedge clk_100);
    // find the first word in the stream
    off = -1;
    for (int o = 0; o < 200 && off < 0; o++) begin
      ok = 1;
      for (int b = 0; b < 64; b++)
        if (stream[o+b] !== (b < 32 ? words[0][31-b] : words[1][31-(b-32)])) ok = 0;
      if (ok) off = o;
    end
    checks++;
    if (off < 0) begin failures++; $display("FAIL first word not found"); end
    else begin
      $display("first bit of the first word after %0d sampled bits", off);
      for (int i = 0; i < NW; i++)
        for (int b = 0; b < 32; b++) begin
          checks++;
          if (stream[off + 32*i + b] !== words[i][31-b]) failures++;
        end
      for (int k = 2; k < nbits; k++) begin
        checks += 2;
        if (s1[k] !== stream[k-1]) failures++;
        if (s2[k] !== stream[k-2]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
