`timescale 1ps/1ps
// coarse_counter: the clock-counting (coarse) part of a TDC channel.
//
// A W-bit binary counter that advances on every rising edge of the sample
// clock; its value is the coarse time of a hit in sample-clock periods. The
// published design maps it onto a DSP48 slice, uses 48 bits and runs at
// 412.5 MHz, which gives 2^48 / 412.5 MHz ~ 7.9 days before the counter
// rolls over. This RTL is a plain counter that synthesis may map to a DSP48.
// The synchronous clear and the one-cycle wrap pulse, raised on the edge
// where the count goes from all ones back to zero, are this design's own.
//
// Ports: clk, rst_n (synchronous, active low), clr (restart from 0),
// count (current value), wrap (one-cycle pulse while count == 0 after a
// roll-over).
module coarse_counter #(
  parameter int unsigned W = marty_pkg::COARSE_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  output logic [W-1:0] count,
  output logic         wrap
);

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      count <= '0;
      wrap  <= 1'b0;
    end else begin
      count <= count + 1'b1;
      wrap  <= &count;
    end
  end

endmodule
