`timescale 1ps/1ps
// tdc_channel: digital part of one TDC channel (hit detection, fine decoding,
// coarse counting and tag assembly).
//
// It takes the registered delay-line snapshot, finds the clock cycle in which
// a new rising edge entered the line, decodes the fine value (the number of
// ones: how many taps the edge crossed before the sampling clock edge) and
// joins it with the coarse value of the cycle into a raw time tag
// {chan, coarse, fine}. Tags are left uncalibrated, as in the published
// design, which stores raw tags and applies the calibration table apart.
//
// Hit detection is this design's choice: a hit is a snapshot whose first tap
// is 1 while the previous snapshot's first tap was 0. It needs input pulses
// longer than the delay line (~2.7 ns), as single-photon detector pulses are,
// and at most one hit per two clock cycles.
// Time of a hit: (coarse + k) * T_clk - t_c(fine), with k a constant common
// to all channels and t_c the calibrated time of the fine bin.
//
// CNT_W (default 48) sets the counter width; a smaller value only serves to
// make the roll-over happen in short simulations.
// Ports: snapshot from the delay line, coarse_clr restarts the coarse counter,
// tag_valid/tag is the tag stream (one cycle per tag), coarse_wrap pulses on
// coarse-counter roll-over.
// Timing: a tag leaves 1 + therm_decoder latency (3) = 4 clocks after its
// snapshot is presented.
module tdc_channel
  import marty_pkg::tag_t, marty_pkg::COARSE_W, marty_pkg::CHAN_W, marty_pkg::FINE_W;
#(
  parameter int unsigned N_TAPS = marty_pkg::N_TAPS,
  parameter int unsigned CHAN   = 0,
  parameter int unsigned CNT_W  = marty_pkg::COARSE_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_TAPS-1:0] snapshot,
  input  logic              coarse_clr,
  output logic              tag_valid,
  output tag_t              tag,
  output logic              coarse_wrap
);

  logic [CNT_W-1:0]    cnt;
  logic [COARSE_W-1:0] coarse;
  logic                first_q;
  logic                hit;
  logic [COARSE_W-1:0] dec_coarse;
  logic [$clog2(N_TAPS+1)-1:0] dec_count;
  logic                dec_valid;

  coarse_counter #(.W(CNT_W)) u_coarse (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (coarse_clr),
    .count (cnt),
    .wrap  (coarse_wrap)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) first_q <= 1'b1;  // no hit is reported for a line already high at reset
    else        first_q <= snapshot[0];
  end

  assign coarse = COARSE_W'(cnt);
  assign hit    = snapshot[0] && !first_q;

  therm_decoder #(
    .N_TAPS (N_TAPS),
    .SIDE_W (COARSE_W)
  ) u_dec (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (hit),
    .in_therm  (snapshot),
    .in_side   (coarse),
    .out_valid (dec_valid),
    .out_count (dec_count),
    .out_side  (dec_coarse)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) tag_valid <= 1'b0;
    else        tag_valid <= dec_valid;
    tag.chan   <= CHAN_W'(CHAN);
    tag.coarse <= dec_coarse;
    tag.fine   <= FINE_W'(dec_count);
  end

endmodule
