`timescale 1ps/1ps
// tb_coarse_counter: checks the coarse counter with an 8-bit width: counting
// by one per clock, the wrap pulse exactly on the cycle after roll-over,
// and the synchronous clear.
module tb_coarse_counter;
  localparam int W = 8;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0;
  logic [W-1:0] count;
  logic wrap;
  int checks = 0, failures = 0;
  int unsigned ref_cnt;
  int wraps = 0;

  coarse_counter #(.W(W)) dut (.clk(clk), .rst_n(rst_n), .clr(clr), .count(count), .wrap(wrap));

  always #1212 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    ref_cnt = 0;
    @(negedge clk);
    for (int i = 0; i < 600; i++) begin
      check(count == W'(ref_cnt), $sformatf("count %0d exp %0d", count, ref_cnt & 8'hff));
      check(wrap == (ref_cnt != 0 && (ref_cnt % 256) == 0), $sformatf("wrap at ref %0d", ref_cnt));
      if (wrap) wraps++;
      @(negedge clk);
      ref_cnt++;
    end
    check(wraps == 2, "two roll-overs in 600 cycles");
    clr = 1'b1; @(negedge clk); clr = 1'b0;
    check(count == 0, "clear");
    @(negedge clk);
    check(count == 1, "count after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
