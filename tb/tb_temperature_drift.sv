`timescale 1ps/1ps
// tb_temperature_drift: the temperature experiment in miniature. The
// converter (8192-event window) is calibrated statically from the ring
// oscillator with the delay line at its nominal delays, then runs on
// uniformly distributed detector hits. The line is then made faster
// (delay_pct 100 -> 97, which after the model rounds each tap down to whole
// ps is 5.4 % faster), about the change that takes a Zynq-7020 carry chain
// from 5 C to 80 C: N_c grows from 131 to about 139 here, where 129 -> 135
// bins were measured on silicon. At four points the calibrated bin centres
// of bins 2..120 are compared with the true centres of the line as it now is (RMS error, in ps):
//   - just before the change: small (the table matches the line);
//   - just after it: large (a calibration taken once goes stale);
//   - after one full window of new hits: small again, with no stop of the
//     acquisition (steady calibration).
// Every hit is also checked to have been stored as a tag.
module tb_temperature_drift;
  import marty_pkg::*;
  localparam int L2 = 13, WIN = 1 << L2;
  localparam int T = 2424, HALF = 1212, N = 144;
  localparam int D[4] = '{8, 30, 12, 24};
  localparam real FRESH_PS = 15.0;   // RMS limit for an up-to-date table
  localparam real STALE_PS = 30.0;   // RMS expected of the stale table

  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] hit_in = '0;
  logic cal_src_ro = 1'b0;
  logic [63:0] buf_rd_data, buf_words;
  logic [5:0] buf_wr_addr;
  logic irq_half, irq_full, buf_overrun;
  logic [15:0] merge_drops;
  logic [1:0] cal_steady, cal_valid, cal_busy, coarse_wrap;
  logic [1:0][7:0] cal_nc;
  logic [1:0][31:0] cal_updates;
  logic [7:0] cal_rd_addr = '0;
  logic [L2+1:0] cal_rd_t;
  logic [L2:0] cal_rd_hist;

  marty_top #(.LOG2_N(L2), .BUF_DEPTH(64)) dut (
    .clk(clk), .rst_n(rst_n), .hit_in(hit_in), .cal_src_ro(cal_src_ro), .coarse_clr(1'b0),
    .cal_restart(2'b00), .buf_rd_en(1'b0), .buf_rd_addr('0), .buf_rd_data(buf_rd_data),
    .buf_wr_addr(buf_wr_addr), .irq_half(irq_half), .irq_full(irq_full), .ack_half(1'b1),
    .ack_full(1'b1), .buf_overrun(buf_overrun), .buf_words(buf_words), .merge_drops(merge_drops),
    .cal_steady(cal_steady), .cal_valid(cal_valid), .cal_busy(cal_busy), .cal_nc(cal_nc),
    .cal_updates(cal_updates), .cal_rd_ch(1'b0), .cal_rd_addr(cal_rd_addr), .cal_rd_t(cal_rd_t),
    .cal_rd_hist(cal_rd_hist), .coarse_wrap(coarse_wrap));

  always #HALF clk = ~clk;

  int checks = 0, failures = 0;
  int pct = 100;
  int hits = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int dly(int k);
    return (D[k % 4] * pct) / 100;
  endfunction

  // RMS distance of the table's bin centres from the line's true centres
  task automatic table_rms(output real rms);
    real acc, t_ps, centre;
    int cum;
    while (cal_busy[0]) @(negedge clk);
    acc = 0.0;
    cum = 0;                       // cum = sum of delays of taps 1..i-1
    for (int i = 2; i <= 120; i++) begin
      cum += dly(i - 1);
      cal_rd_addr = 8'(i);
      @(negedge clk);
      t_ps = real'(cal_rd_t) * T / real'(2 * WIN);
      centre = real'(cum) + real'(dly(i)) / 2.0;
      acc += (t_ps - centre) * (t_ps - centre);
    end
    rms = $sqrt(acc / 119.0);
  endtask

  task automatic detector_hits(int n);
    for (int h = 0; h < n; h++) begin
      int o;
      @(posedge clk);
      o = int'($urandom_range(1, T - 1));
      #o hit_in = 2'b11;
      #5000 hit_in = 2'b00;
      hits++;
      repeat (2 + $urandom_range(0, 3)) @(posedge clk);
    end
  endtask

  initial begin
    real r_cal, r_stale, r_mid, r_fresh;
    int nc0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    cal_src_ro = 1'b1;
    while (cal_steady != 2'b11) @(negedge clk);
    cal_src_ro = 1'b0;
    repeat (10) @(negedge clk);
    detector_hits(2048);
    table_rms(r_cal);
    nc0 = int'(cal_nc[0]);
    // temperature step: the carry chain becomes faster
    pct = 97;
    dut.g_ch[0].u_tdl.delay_pct = 97;
    dut.g_ch[1].u_tdl.delay_pct = 97;
    table_rms(r_stale);
    detector_hits(WIN / 2);
    table_rms(r_mid);
    detector_hits(WIN / 2 + 256);
    table_rms(r_fresh);
    $display("RMS bin-centre error: calibrated %0.1f ps, after the step %0.1f ps, half a window later %0.1f ps, one window later %0.1f ps",
             r_cal, r_stale, r_mid, r_fresh);
    $display("N_c: %0d before, %0d after", nc0, cal_nc[0]);
    check(r_cal < FRESH_PS, "table matches the line before the step");
    check(r_stale > STALE_PS, "stale table after the step");
    check(r_mid < r_stale, "error falls while the window refills");
    check(r_fresh < FRESH_PS, "steady calibration has caught up");
    check(int'(cal_nc[0]) > nc0, "faster line uses more bins");
    check(buf_words == 64'(2 * hits), $sformatf("%0d tags stored for %0d hits", buf_words, hits));
    check(merge_drops == 0, "no drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
