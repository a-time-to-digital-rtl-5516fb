`timescale 1ps/1ps
// tb_ring_osc_model: checks that the ring-oscillator model rests low while
// disabled, toggles every HALF_PS while enabled and stops when disabled.
module tb_ring_osc_model;
  localparam int HALF = 3967;
  logic en = 1'b0, ro;
  int checks = 0, failures = 0;
  int edges = 0;
  time last_t = 0;

  ring_osc_model #(.HALF_PS(HALF)) dut (.en(en), .ro_out(ro));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(ro) begin
    if (edges > 0 && en) check($time - last_t == HALF, $sformatf("half period %0t", $time - last_t));
    edges++;
    last_t = $time;
  end

  initial begin
    #100;
    edges = 0;
    #20000;
    check(ro == 1'b0 && edges == 0, "idle while disabled");
    en = 1'b1;
    last_t = $time;
    #(HALF * 40 + HALF / 2);
    check(edges >= 40, $sformatf("toggled %0d times", edges));
    en = 1'b0;
    #(HALF * 2);
    edges = 0;
    #(HALF * 10);
    check(ro == 1'b0 && edges == 0, "stopped after disable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
