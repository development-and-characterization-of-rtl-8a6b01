`timescale 1ps / 1fs
// ser_stage -- one 2N:N stage of the DDR binary-tree serializer.
//
// The input word of 2N lanes must be stable around the falling edge of clk.
// At that edge the lower half in[N-1:0] goes to the output register qn and
// the upper half is parked in sv; at the rising edge sv moves to qp. The
// output multiplexer selects qn while clk is low and qp while it is high, so
// each output lane carries two bits per clk period (double data rate):
// lane j sends in[j] and then in[j+N]. The output changes on both edges of
// clk, which are rising edges of the next stage's clock (twice the
// frequency); the next stage samples on its own falling edge, half a bit
// away from every change. Cascading such stages sends the lanes of the
// first stage's input in index order.
//
// clk drives the select of the output multiplexer as the clock does in a
// full-custom DDR multiplexer; this is intended.
module ser_stage #(
  parameter int unsigned N = 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [2*N-1:0] din,
  output logic [N-1:0]   dout
);
  logic [N-1:0] qn, sv, qp;

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qn <= '0;
      sv <= '0;
    end else begin
      qn <= din[N-1:0];
      sv <= din[2*N-1:N];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) qp <= '0;
    else        qp <= sv;
  end

  assign dout = clk ? qp : qn;
endmodule
