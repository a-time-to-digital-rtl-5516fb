`timescale 1ps/1ps
// sync_fifo: small single-clock first-in first-out buffer (helper of
// tag_merger).
//
// A circular array of DEPTH words with a read and a write pointer one bit
// wider than the address, so that full and empty differ by the top bit.
// Writes to a full FIFO are refused (push_ok low). The output word is the
// head of the queue, valid while empty is low (first-word fall-through).
//
// Ports: push/din write, pop reads the head; dout, empty, full, push_ok.
// Timing: a word pushed in cycle n is at dout in cycle n+1.
module sync_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  output logic         push_ok,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign empty   = (wp == rp);
  assign full    = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign push_ok = push && !full;
  assign dout    = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push_ok) mem[wp[AW-1:0]] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push_ok)         wp <= wp + 1'b1;
      if (pop && !empty)   rp <= rp + 1'b1;
    end
  end

endmodule
