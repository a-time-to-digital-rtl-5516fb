`timescale 1ps/1ps
// tag_buffer: block-RAM double buffer between the TDC and the processor.
//
// Tags are written at consecutive addresses of a DEPTH-word memory that
// wraps around. The memory is treated as two halves: when the last word of
// the first half is written irq_half is raised, when the last word of the
// second half is written irq_full is raised; the processor then copies the
// finished half (by DMA, in the published system) while the tags go into the
// other half. For request-driven readout the processor instead reads
// wr_addr, the next address to be written, and copies everything between
// the address of its previous request and wr_addr.
// This follows the published streaming scheme. The depth (16384 x 64 bit,
// 28 of the Zynq-7020's 140 36-kbit block RAMs) is this design's choice; so
// are the level interrupts held until acknowledged and the overrun flag,
// set when a half starts to be rewritten while its interrupt is still
// pending, i.e. before the processor finished with it.
//
// Ports: in_valid/in_tag write port (one word per clock); rd_en/rd_addr/
// rd_data processor read port; wr_addr; irq_half, irq_full with ack_half,
// ack_full; overrun (sticky until reset); words (total tags written, 64 bit).
// Timing: rd_data is valid one clock after rd_en; an interrupt rises one
// clock after the write of the last word of its half.
module tag_buffer
  import marty_pkg::TAG_W;
#(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [TAG_W-1:0] rd_data,
  output logic [AW-1:0]    wr_addr,
  output logic             irq_half,
  output logic             irq_full,
  input  logic             ack_half,
  input  logic             ack_full,
  output logic             overrun,
  output logic [63:0]      words
);

  logic [TAG_W-1:0] mem [DEPTH];
  logic             last_of_half, last_of_full, first_of_low, first_of_high;

  assign last_of_half  = (wr_addr == AW'(DEPTH / 2 - 1));
  assign last_of_full  = (wr_addr == AW'(DEPTH - 1));
  assign first_of_low  = (wr_addr == '0);
  assign first_of_high = (wr_addr == AW'(DEPTH / 2));

  always_ff @(posedge clk) begin
    if (in_valid) mem[wr_addr] <= in_tag;
    if (rd_en)    rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_addr  <= '0;
      irq_half <= 1'b0;
      irq_full <= 1'b0;
      overrun  <= 1'b0;
      words    <= '0;
    end else begin
      if (ack_half) irq_half <= 1'b0;
      if (ack_full) irq_full <= 1'b0;
      if (in_valid) begin
        wr_addr <= (last_of_full) ? '0 : wr_addr + 1'b1;
        words   <= words + 1'b1;
        if (last_of_half) irq_half <= 1'b1;
        if (last_of_full) irq_full <= 1'b1;
        // rewriting a half whose interrupt (its "done" flag) is still pending
        if ((first_of_low && irq_half && !ack_half) ||
            (first_of_high && irq_full && !ack_full)) overrun <= 1'b1;
      end
    end
  end

  initial begin
    assert (DEPTH >= 4 && DEPTH % 2 == 0)
      else $error("tag_buffer: DEPTH must be even and at least 4");
  end

endmodule
