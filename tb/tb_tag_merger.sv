`timescale 1ps/1ps
// tb_tag_merger: two channels. Phase 1: each channel offers a tag at most
// every other clock (the most a TDC channel can produce); every tag must come
// out once, in order within its channel, with no drops. Phase 2: both
// channels offer a tag every clock; the output must run at one tag per clock,
// some tags are dropped, and delivered + dropped must equal offered.
module tb_tag_merger;
  import marty_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] in_valid = '0;
  tag_t in_tag [2];
  logic out_valid;
  tag_t out_tag;
  logic [15:0] drops;
  int checks = 0, failures = 0;
  tag_t q [2][$];
  int offered = 0, delivered = 0, out_cycles = 0;
  bit phase2 = 1'b0;

  tag_merger #(.NUM_CH(2)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_tag(in_tag),
    .out_valid(out_valid), .out_tag(out_tag), .drops(drops));

  always #1212 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) begin
    if (out_valid) begin
      int c;
      delivered++;
      c = int'(out_tag.chan);
      if (phase2) out_cycles++;
      else if (c > 1 || q[c].size() == 0) check(1'b0, "unexpected tag");
      else begin
        tag_t e;
        e = q[c].pop_front();
        check(out_tag == e, $sformatf("ch %0d tag mismatch", c));
      end
    end
  end

  initial begin
    in_tag[0] = '0; in_tag[1] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      for (int c = 0; c < 2; c++) begin
        bit v;
        v = (i % 2 == c) ? ($urandom_range(0, 3) != 0) : 1'b0;
        in_valid[c] = v;
        in_tag[c].chan = 8'(c);
        in_tag[c].coarse = 48'(i);
        in_tag[c].fine = 8'($urandom_range(1, 140));
        if (v) begin q[c].push_back(in_tag[c]); offered++; end
      end
      @(negedge clk);
    end
    in_valid = '0;
    repeat (10) @(negedge clk);
    check(q[0].size() == 0 && q[1].size() == 0, "all tags delivered");
    check(drops == 0, "no drops at channel rate");
    check(delivered == offered, "delivered count");
    // phase 2: overload
    phase2 = 1'b1;
    delivered = 0; offered = 0;
    for (int i = 0; i < 50; i++) begin
      in_valid = 2'b11;
      offered += 2;
      @(negedge clk);
    end
    in_valid = '0;
    repeat (10) @(negedge clk);
    check(drops > 0, "overload drops tags");
    check(delivered + int'(drops) == offered, $sformatf("delivered %0d + drops %0d = offered %0d", delivered, drops, offered));
    check(delivered >= 50, "one tag per clock under overload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
