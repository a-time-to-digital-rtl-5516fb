`timescale 1ps/1ps
// tb_tdl_model: launches rising edges at known times before a sample-clock
// edge and checks the captured thermometer code against the number of taps
// whose cumulative delay (from the per-tap pattern) is below the elapsed
// time. A second instance has 120 % delays and a bubble on every snapshot:
// its code must show the two boundary bits swapped.
module tb_tdl_model;
  localparam int N = 144;
  localparam int T = 2424;
  localparam int D[4] = '{8, 30, 12, 24};
  logic clk = 1'b0, sig = 1'b0;
  logic [N-1:0] snap_a, snap_b;
  int checks = 0, failures = 0;
  int cum_a [N+1];
  int cum_b [N+1];

  tdl_model #(.N_TAPS(N)) dut_a (.clk(clk), .sig_in(sig), .snapshot(snap_a));
  tdl_model #(.N_TAPS(N), .DELAY_PCT(120), .BUBBLE_EVERY(1)) dut_b (.clk(clk), .sig_in(sig), .snapshot(snap_b));

  always #(T/2) clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [N-1:0] therm(int n);
    logic [N-1:0] t = '0;
    for (int k = 0; k < n; k++) t[k] = 1'b1;
    return t;
  endfunction

  // taps crossed: k with cum[k+1] < delta; -1 when delta hits a boundary
  function automatic int expect_n(int delta, bit scaled);
    int n = 0;
    for (int k = 1; k <= N; k++) begin
      int c = scaled ? cum_b[k] : cum_a[k];
      if (c == delta) return -1;
      if (c < delta) n = k;
    end
    return n;
  endfunction

  initial begin
    cum_a[0] = 0; cum_b[0] = 0;
    for (int k = 0; k < N; k++) begin
      cum_a[k+1] = cum_a[k] + D[k % 4];
      cum_b[k+1] = cum_b[k] + (D[k % 4] * 120) / 100;
    end
    check(cum_a[N] > T, "144 taps span more than one clock period");
    repeat (2) @(posedge clk);
    for (int i = 0; i < 300; i++) begin
      int delta, na, nb;
      delta = (i < 20) ? i * 121 + 3 : int'($urandom_range(1, T - 1));
      @(posedge clk);
      #(T - delta) sig = 1'b1;
      @(posedge clk);
      @(negedge clk);
      na = expect_n(delta, 1'b0);
      nb = expect_n(delta, 1'b1);
      if (na >= 0) check(snap_a == therm(na), $sformatf("delta %0d: got %0d ones exp %0d", delta, $countones(snap_a), na));
      if (nb >= 0) begin
        logic [N-1:0] e;
        e = therm(nb);
        if (nb >= 2 && nb < N) begin e[nb-1] = 1'b0; e[nb] = 1'b1; end
        check(snap_b == e, $sformatf("bubble delta %0d exp %0d", delta, nb));
      end
      @(posedge clk); @(negedge clk);
      if (na >= 0 && expect_n(delta + T, 1'b0) >= 0)
        check($countones(snap_a) == expect_n(delta + T, 1'b0), "second snapshot keeps propagating");
      sig = 1'b0;
      repeat (3) @(posedge clk);
    end
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
