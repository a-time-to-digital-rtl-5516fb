`timescale 1ps/1ps
// tag_merger: joins the tag streams of NUM_CH TDC channels into the single
// stream written to the tag buffer.
//
// The published device runs two channels into one acquisition memory but
// does not say how their tags are merged; this block is this design's own.
// Each channel has a FIFO_DEPTH-word FIFO; a round-robin pointer takes one
// tag per clock from the next non-empty FIFO. Since a channel delivers at
// most one tag every two clocks, two channels never fill the FIFOs; with
// more channels or denser hits a tag that finds its FIFO full is dropped and
// counted in drops (saturating).
//
// Ports: in_valid[c]/in_tag[c] per channel, out_valid/out_tag merged stream
// (no back-pressure: the tag buffer accepts a word every clock), drops.
// Timing: a tag reaches the output 1 clock after entering an empty FIFO
// whose turn it is; output rate one tag per clock.
module tag_merger
  import marty_pkg::tag_t, marty_pkg::TAG_W;
#(
  parameter int unsigned NUM_CH     = 2,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NUM_CH-1:0] in_valid,
  input  tag_t              in_tag [NUM_CH],
  output logic              out_valid,
  output tag_t              out_tag,
  output logic [15:0]       drops
);

  localparam int unsigned CW = (NUM_CH > 1) ? $clog2(NUM_CH) : 1;

  logic [NUM_CH-1:0] empty, push_ok, pop;
  logic [TAG_W-1:0]  head [NUM_CH];
  logic [CW-1:0]     rr;        // channel with priority this cycle
  logic [CW-1:0]     pick;
  logic              any;

  for (genvar c = 0; c < NUM_CH; c++) begin : g_fifo
    sync_fifo #(.W(TAG_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk     (clk),
      .rst_n   (rst_n),
      .push    (in_valid[c]),
      .din     (in_tag[c]),
      .push_ok (push_ok[c]),
      .pop     (pop[c]),
      .dout    (head[c]),
      .empty   (empty[c]),
      .full    ()
    );
  end

  // Round robin: first non-empty FIFO at or after rr.
  always_comb begin
    any  = 1'b0;
    pick = rr;
    for (int unsigned k = 0; k < NUM_CH; k++) begin
      logic [CW-1:0] c;
      c = CW'((32'(rr) + k) % NUM_CH);
      if (!any && !empty[c]) begin
        any  = 1'b1;
        pick = c;
      end
    end
    pop = '0;
    if (any) pop[pick] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rr        <= '0;
      out_valid <= 1'b0;
      drops     <= '0;
    end else begin
      out_valid <= any;
      if (any) rr <= CW'((32'(pick) + 1) % NUM_CH);
      if ((in_valid & ~push_ok) != '0 && drops != '1) drops <= drops + 1'b1;
    end
    out_tag <= head[pick];
  end

endmodule
