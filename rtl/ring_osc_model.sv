`timescale 1ps/1ps
// ring_osc_model: BEHAVIOURAL MODEL (not synthesizable) of the on-chip ring
// oscillator used as the input of the static code-density test.
//
// A ring oscillator is a loop of inverting delay elements; its output is a
// square wave whose phase bears no relation to the sample clock, so its
// rising edges fall uniformly over the delay line. Here it is a square wave
// of HALF_PS high and HALF_PS low that runs while en is high and rests low
// otherwise. The default 3967 ps half period is this design's choice: longer
// than the 144-tap line (~2.66 ns), so that every rising edge shows as a
// clean thermometer code, and not commensurate with the 2424 ps sample clock.
//
// Ports: en (run the oscillator), ro_out (oscillator output).
module ring_osc_model #(
  parameter int unsigned HALF_PS = 3967
) (
  input  logic en,
  output logic ro_out
);

  initial ro_out = 1'b0;

  always begin
    if (!en) begin
      ro_out = 1'b0;
      @(posedge en);
    end
    #(HALF_PS) ro_out = en ? ~ro_out : 1'b0;
  end

endmodule
