`timescale 1ps/1ps
// therm_decoder: thermometer-to-binary decoder of the delay-line snapshot.
//
// The published design uses the decoder of Adamic et al., a pipelined adder
// tree that counts the ones in the snapshot instead of looking for the
// ones/zeros boundary. Counting ones makes the result immune to "bubbles"
// (two neighbouring bits swapped by metastability): 11110100 and 11111000
// both decode to 5.
//
// The tree here has three register stages (this design's choice of split):
//   stage 1: ones in each group of GROUP1 taps (one CARRY4 = 4 taps),
//   stage 2: sum of GROUP2 stage-1 results,
//   stage 3: sum of all stage-2 results.
// A sideband word (in_side, e.g. the coarse time) and a valid bit travel
// with the data so they leave together with the count.
//
// Ports: in_valid/in_therm/in_side in, out_valid/out_count/out_side out.
// Timing: fully pipelined, one snapshot per clock, LATENCY = 3 clocks.
module therm_decoder #(
  parameter int unsigned N_TAPS = marty_pkg::N_TAPS,
  parameter int unsigned GROUP1 = 4,
  parameter int unsigned GROUP2 = 6,
  parameter int unsigned SIDE_W = 1,
  parameter int unsigned OUT_W  = $clog2(N_TAPS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [N_TAPS-1:0] in_therm,
  input  logic [SIDE_W-1:0] in_side,
  output logic              out_valid,
  output logic [OUT_W-1:0]  out_count,
  output logic [SIDE_W-1:0] out_side
);

  localparam int unsigned LATENCY = 3;
  localparam int unsigned N1  = (N_TAPS + GROUP1 - 1) / GROUP1;  // stage-1 sums
  localparam int unsigned N2  = (N1 + GROUP2 - 1) / GROUP2;      // stage-2 sums
  localparam int unsigned W1  = $clog2(GROUP1 + 1);
  localparam int unsigned W2  = $clog2(GROUP1 * GROUP2 + 1);

  logic [N1-1:0][W1-1:0] s1_q;
  logic [N2-1:0][W2-1:0] s2_q;
  logic [LATENCY-1:0]               v_q;
  logic [LATENCY-1:0][SIDE_W-1:0]   side_q;

  // Stage 1: ones per group of taps.
  always_ff @(posedge clk) begin
    for (int unsigned g = 0; g < N1; g++) begin
      logic [W1-1:0] acc;
      acc = '0;
      for (int unsigned b = 0; b < GROUP1; b++) begin
        if (g * GROUP1 + b < N_TAPS) acc = acc + W1'(in_therm[g * GROUP1 + b]);
      end
      s1_q[g] <= acc;
    end
  end

  // Stage 2: sums of GROUP2 stage-1 results.
  always_ff @(posedge clk) begin
    for (int unsigned g = 0; g < N2; g++) begin
      logic [W2-1:0] acc;
      acc = '0;
      for (int unsigned b = 0; b < GROUP2; b++) begin
        if (g * GROUP2 + b < N1) acc = acc + W2'(s1_q[g * GROUP2 + b]);
      end
      s2_q[g] <= acc;
    end
  end

  // Stage 3: final sum.
  always_ff @(posedge clk) begin
    logic [OUT_W-1:0] acc;
    acc = '0;
    for (int unsigned g = 0; g < N2; g++) acc = acc + OUT_W'(s2_q[g]);
    out_count <= acc;
  end

  // Valid and sideband pipeline.
  always_ff @(posedge clk) begin
    if (!rst_n) v_q <= '0;
    else        v_q <= {v_q[LATENCY-2:0], in_valid};
    side_q <= {side_q[LATENCY-2:0], in_side};
  end

  assign out_valid = v_q[LATENCY-1];
  assign out_side  = side_q[LATENCY-1];

endmodule
