`timescale 1ps/1ps
// tb_tdc_channel: presents delay-line snapshots directly (a new edge shows
// first as n ones, then the line stays high, then returns to zero) and
// checks every tag: channel number, the coarse count of the cycle in which
// the edge appeared (from a reference counter), the fine value n, and the
// 4-clock latency. Snapshots that stay high must not make new tags.
module tb_tdc_channel;
  import marty_pkg::*;
  localparam int N = 144;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0;
  logic [N-1:0] snap = '0;
  logic tag_valid, wrap;
  tag_t tag;
  int checks = 0, failures = 0;
  longint ref_cnt = 0;
  int cyc = 0;
  int q_n [$];
  longint q_c [$];
  int q_cyc [$];
  int tags = 0;

  tdc_channel #(.N_TAPS(N), .CHAN(5)) dut (
    .clk(clk), .rst_n(rst_n), .snapshot(snap), .coarse_clr(clr),
    .tag_valid(tag_valid), .tag(tag), .coarse_wrap(wrap));

  always #1212 clk = ~clk;
  always @(posedge clk) begin
    ref_cnt <= (!rst_n || clr) ? 0 : ref_cnt + 1;
    cyc <= cyc + 1;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) begin
    if (tag_valid) begin
      tags++;
      if (q_n.size() == 0) check(1'b0, "unexpected tag");
      else begin
        int n, c0; longint c;
        n = q_n.pop_front(); c = q_c.pop_front(); c0 = q_cyc.pop_front();
        check(tag.chan == 8'd5, "channel field");
        check(tag.fine == 8'(n), $sformatf("fine %0d exp %0d", tag.fine, n));
        check(tag.coarse == 48'(c), $sformatf("coarse %0d exp %0d", tag.coarse, c));
        check(cyc - c0 == 4, $sformatf("latency %0d", cyc - c0));
      end
    end
  end

  function automatic logic [N-1:0] therm(int n);
    logic [N-1:0] t = '0;
    for (int k = 0; k < n; k++) t[k] = 1'b1;
    return t;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);
    for (int i = 0; i < 200; i++) begin
      int n;
      logic [N-1:0] t;
      n = int'($urandom_range(1, 135));
      t = therm(n);
      if (i % 4 == 1 && n >= 2) begin t[n-1] = 1'b0; t[n] = 1'b1; end
      snap = t;
      q_n.push_back(n); q_c.push_back(ref_cnt); q_cyc.push_back(cyc);
      @(negedge clk);
      snap = '1;                       // line fully high: no new hit
      repeat (i % 3) @(negedge clk);
      snap = '0;
      @(negedge clk);
      if (i == 100) begin
        clr = 1'b1; @(negedge clk); clr = 1'b0;
      end
    end
    repeat (8) @(negedge clk);
    check(q_n.size() == 0 && tags == 200, $sformatf("%0d tags for 200 hits", tags));
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
