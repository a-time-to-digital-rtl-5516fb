`timescale 1ps/1ps
// tdl_model: BEHAVIOURAL MODEL (not synthesizable) of the tapped delay line
// and its sampling flip-flops.
//
// In the FPGA the line is a chain of 36 CARRY4 primitives, i.e. 144 fast-carry
// taps, each tap followed by a flip-flop clocked by the 412.5 MHz sample
// clock. A rising edge on sig_in runs up the chain; at each clock edge the
// flip-flops capture how far it got, a thermometer code (ones from tap 0 up).
// The model reproduces this with one transport delay per tap. The real tap
// delays are unequal (from a few ps to ~100 ps) and unknown; here they repeat
// the pattern TAP_PS_A..D per CARRY4 (8, 30, 12, 24 ps by default: mean 18.5
// ps, so 144 taps span ~2.66 ns, more than one 2.42 ns clock period, and
// about 131 bins are used, as the 129..135 observed on the real device).
// DELAY_PCT scales all delays; it loads the variable delay_pct, which a
// testbench may change during a run to model a temperature change (the
// carry-chain delay falls as the chip warms up).
// BUBBLE_EVERY > 0 swaps the two bits at the ones/zeros boundary of every
// BUBBLE_EVERY-th snapshot that has such a boundary, imitating the "bubble"
// errors that flip-flop metastability produces.
//
// Ports: clk (sample clock), sig_in (input signal, asynchronous),
// snapshot (registered thermometer code, bit 0 = first tap).
// Timing: snapshot changes one clock edge after the taps are sampled.
module tdl_model #(
  parameter int unsigned N_TAPS       = marty_pkg::N_TAPS,
  parameter int unsigned TAP_PS_A     = 8,
  parameter int unsigned TAP_PS_B     = 30,
  parameter int unsigned TAP_PS_C     = 12,
  parameter int unsigned TAP_PS_D     = 24,
  parameter int unsigned DELAY_PCT    = 100,
  parameter int unsigned BUBBLE_EVERY = 0
) (
  input  logic              clk,
  input  logic              sig_in,
  output logic [N_TAPS-1:0] snapshot
);

  // Delay scale in percent; a testbench may change it during a run.
  int unsigned delay_pct = DELAY_PCT;

  function automatic int unsigned tap_ps(int unsigned k);
    int unsigned d;
    case (k % 4)
      0:       d = TAP_PS_A;
      1:       d = TAP_PS_B;
      2:       d = TAP_PS_C;
      default: d = TAP_PS_D;
    endcase
    return (d * delay_pct) / 100;
  endfunction

  logic [N_TAPS-1:0] tap;

  for (genvar k = 0; k < N_TAPS; k++) begin : g_tap
    if (k == 0) begin : g_first
      always @(sig_in) tap[0] <= #(tap_ps(0)) sig_in;
    end else begin : g_next
      always @(tap[k-1]) tap[k] <= #(tap_ps(k)) tap[k-1];
    end
  end

  int unsigned sample_cnt;
  initial begin
    tap        = '0;
    snapshot   = '0;
    sample_cnt = 0;
  end

  always @(posedge clk) begin : sample
    logic [N_TAPS-1:0] s;
    s = tap;
    if (BUBBLE_EVERY > 0) begin
      for (int unsigned p = 0; p + 1 < N_TAPS; p++) begin
        if (s[p] && !s[p+1] && (p == 0 || s[p-1])) begin
          sample_cnt = sample_cnt + 1;
          if (sample_cnt % BUBBLE_EVERY == 0 && p > 0) begin
            s[p]   = 1'b0;
            s[p+1] = 1'b1;
          end
          break;
        end
      end
    end
    snapshot <= s;
  end

endmodule
