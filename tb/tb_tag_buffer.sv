`timescale 1ps/1ps
// tb_tag_buffer: a 16-word buffer. Writes words in bursts and gaps, checks
// wr_addr, irq_half right after word 8 and irq_full right after word 16 of
// each pass, reads every finished half back (one-clock read latency) as the
// processor would, acknowledges, and finally provokes an overrun by not
// acknowledging a half before it is rewritten.
module tb_tag_buffer;
  localparam int D = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [63:0] in_tag = '0;
  logic rd_en = 1'b0;
  logic [3:0] rd_addr = '0;
  logic [63:0] rd_data, words;
  logic [3:0] wr_addr;
  logic irq_half, irq_full, overrun;
  logic ack_half = 1'b0, ack_full = 1'b0;
  int checks = 0, failures = 0;
  longint model [D];
  int n = 0;
  int halves = 0, fulls = 0;

  tag_buffer #(.DEPTH(D)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_tag(in_tag),
    .rd_en(rd_en), .rd_addr(rd_addr), .rd_data(rd_data), .wr_addr(wr_addr),
    .irq_half(irq_half), .irq_full(irq_full), .ack_half(ack_half), .ack_full(ack_full),
    .overrun(overrun), .words(words));

  always #1212 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_word();
    longint v;
    v = {$urandom, $urandom};
    in_valid = 1'b1; in_tag = v;
    model[n % D] = v;
    @(negedge clk);
    in_valid = 1'b0;
    n++;
    check(wr_addr == 4'(n % D), "write address");
    check(words == 64'(n), "word count");
  endtask

  task automatic drain(int base);
    for (int a = base; a < base + D / 2; a++) begin
      rd_en = 1'b1; rd_addr = 4'(a);
      @(negedge clk);
      rd_en = 1'b0;
      check(rd_data == model[a], $sformatf("read back word %0d", a));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int pass = 0; pass < 3; pass++) begin
      for (int i = 0; i < D; i++) begin
        write_word();
        if (i % 3 == 2) @(negedge clk);
        if (i == D / 2 - 1) begin
          check(irq_half && !irq_full, "irq_half after first half");
          halves++;
          drain(0);
          ack_half = 1'b1; @(negedge clk); ack_half = 1'b0;
          check(!irq_half, "irq_half cleared");
        end else if (i == D - 1) begin
          check(irq_full && !irq_half, "irq_full after second half");
          fulls++;
          drain(D / 2);
          ack_full = 1'b1; @(negedge clk); ack_full = 1'b0;
        end else begin
          check(!irq_half && !irq_full, "no interrupt mid-half");
        end
      end
    end
    check(!overrun && halves == 3 && fulls == 3, "no overrun while acknowledged");
    // continuous writing, each half acknowledged a few words into the next
    begin
      int hc = 0, fc = 0;
      for (int i = 0; i < 2 * D; i++) begin
        write_word();
        if (irq_half && ++hc == 3) begin ack_half = 1'b1; @(negedge clk); ack_half = 1'b0; hc = 0; end
        if (irq_full && ++fc == 3) begin ack_full = 1'b1; @(negedge clk); ack_full = 1'b0; fc = 0; end
      end
      check(!overrun, "no overrun when halves are acknowledged while the other half fills");
      while (irq_half || irq_full) begin
        ack_half = 1'b1; ack_full = 1'b1; @(negedge clk); ack_half = 1'b0; ack_full = 1'b0;
      end
    end
    // processor late: never acknowledge
    for (int i = 0; i < D + 1; i++) write_word();
    check(overrun, "overrun when a pending half is rewritten");
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
