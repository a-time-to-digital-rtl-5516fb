`timescale 1ps/1ps
// tb_therm_decoder: drives the 144-tap decoder with random thermometer codes,
// some with a bubble (two bits swapped at the ones/zeros boundary), and
// checks the count (the length of the clean code) and the sideband word
// exactly LATENCY = 3 clocks after input, one code per clock.
module tb_therm_decoder;
  localparam int N = 144;
  localparam int LAT = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [N-1:0] in_therm = '0;
  logic [15:0] in_side = '0;
  logic out_valid;
  logic [7:0] out_count;
  logic [15:0] out_side;
  int checks = 0, failures = 0;
  int exp_n [$];
  int exp_side [$];
  int cyc = 0;
  int sent_cyc [$];

  therm_decoder #(.N_TAPS(N), .SIDE_W(16)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_therm(in_therm), .in_side(in_side),
    .out_valid(out_valid), .out_count(out_count), .out_side(out_side));

  always #1212 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int n, s, c;
      n = exp_n.pop_front(); s = exp_side.pop_front(); c = sent_cyc.pop_front();
      check(out_count == 8'(n), $sformatf("count %0d exp %0d", out_count, n));
      check(out_side == 16'(s), "sideband");
      check(cyc - c == LAT, $sformatf("latency %0d", cyc - c));
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 400; i++) begin
      int n;
      logic [N-1:0] t;
      n = (i < 145) ? i : int'($urandom_range(0, N));
      t = '0;
      for (int k = 0; k < n; k++) t[k] = 1'b1;
      if (i % 3 == 0 && n >= 2 && n < N) begin
        t[n-1] = 1'b0; t[n] = 1'b1;  // bubble
      end
      in_valid <= (i % 5 != 4);
      in_therm <= t;
      in_side  <= 16'(i * 7);
      if (i % 5 != 4) begin
        exp_n.push_back(n); exp_side.push_back(i * 7); sent_cyc.push_back(cyc + 1);
      end
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (6) @(posedge clk);
    check(exp_n.size() == 0, "all codes came out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
