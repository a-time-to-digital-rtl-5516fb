`timescale 1ps/1ps
// tb_marty_top_full: the two-channel TDC at its default sizes (144 taps,
// 131072-event window, 16384-word buffer, 48-bit coarse counter).
//   1. Static calibration from the ring oscillator: 131072 oscillator edges
//      per channel. Afterwards each table is checked against the delay line
//      it calibrates: for bin i the calibrated time must lie within TOL_PS of
//      the centre of the bin computed from the model's tap delays
//      (cum(i) - cum(1) + d_i / 2, the line start being the first tap), the
//      histogram must hold exactly 131072 events, and each table entry must
//      follow from the histogram by T_i = w_i + 2*sum_{j<i} w_j.
//   2. 300 detector hits split to both channels; every tag is read back by a
//      request-style read of the buffer and checked (fine from the tap
//      delays, coarse from the clock-edge index), and the steady calibration
//      must have produced new tables.
module tb_marty_top_full;
  import marty_pkg::*;
  localparam int NCH = 2, W = 1 << LOG2_N_EVENTS, AW = 14;
  localparam int T = 2424, HALF = 1212, N = 144;
  localparam int D[4] = '{8, 30, 12, 24};
  localparam int NHITS = 300;
  localparam real TOL_PS = 10.0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NCH-1:0] hit_in = '0, cal_restart = '0;
  logic cal_src_ro = 1'b0, coarse_clr = 1'b0;
  logic buf_rd_en = 1'b0;
  logic [AW-1:0] buf_rd_addr = '0, buf_wr_addr;
  logic [63:0] buf_rd_data, buf_words;
  logic irq_half, irq_full, buf_overrun;
  logic [15:0] merge_drops;
  logic [NCH-1:0] cal_steady, cal_valid, cal_busy, coarse_wrap;
  logic [NCH-1:0][7:0] cal_nc;
  logic [NCH-1:0][31:0] cal_updates;
  logic cal_rd_ch = 1'b0;
  logic [7:0] cal_rd_addr = '0;
  logic [LOG2_N_EVENTS+1:0] cal_rd_t;
  logic [LOG2_N_EVENTS:0] cal_rd_hist;

  marty_top dut (
    .clk(clk), .rst_n(rst_n), .hit_in(hit_in), .cal_src_ro(cal_src_ro), .coarse_clr(coarse_clr),
    .cal_restart(cal_restart), .buf_rd_en(buf_rd_en), .buf_rd_addr(buf_rd_addr),
    .buf_rd_data(buf_rd_data), .buf_wr_addr(buf_wr_addr), .irq_half(irq_half), .irq_full(irq_full),
    .ack_half(1'b0), .ack_full(1'b0), .buf_overrun(buf_overrun), .buf_words(buf_words),
    .merge_drops(merge_drops), .cal_steady(cal_steady), .cal_valid(cal_valid), .cal_busy(cal_busy),
    .cal_nc(cal_nc), .cal_updates(cal_updates), .cal_rd_ch(cal_rd_ch), .cal_rd_addr(cal_rd_addr),
    .cal_rd_t(cal_rd_t), .cal_rd_hist(cal_rd_hist), .coarse_wrap(coarse_wrap));

  always #HALF clk = ~clk;

  int checks = 0, failures = 0;
  int cum [N+1];
  int q_fine [NCH][$];
  longint q_edge [NCH][$];
  longint coarse_off = -1;
  real worst_ps = 0.0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int taps(int delta);
    int n = 0;
    for (int k = 1; k <= N; k++) begin
      if (cum[k] == delta) return -1;
      if (cum[k] < delta) n = k;
    end
    return n;
  endfunction

  task automatic check_table(int c);
    int w, sum, nc, t_exp, w1, wnc;
    real t_ps, centre;
    cal_rd_ch = 1'(c);
    nc = int'(cal_nc[c]);
    check(nc >= 125 && nc <= 140, $sformatf("ch%0d N_c = %0d", c, nc));
    cal_rd_addr = 8'(nc); @(negedge clk); wnc = int'(cal_rd_hist);
    sum = 0;
    for (int i = 0; i <= N; i++) begin
      cal_rd_addr = 8'(i);
      @(negedge clk);
      w = int'(cal_rd_hist);
      if (i == 1) w1 = w;
      t_exp = (i == 0) ? 0 : (i == 1) ? w + wnc : w + 2 * sum;
      if (i >= 1) sum += w;
      check(int'(cal_rd_t) == t_exp, $sformatf("ch%0d T[%0d] = %0d, from histogram %0d", c, i, cal_rd_t, t_exp));
      if (i >= 2 && i <= 120) begin
        t_ps = real'(cal_rd_t) * T / real'(2 * W);
        centre = real'(cum[i] - cum[1]) + real'(D[i % 4]) / 2.0;
        if ((t_ps - centre > worst_ps) || (centre - t_ps > worst_ps))
          worst_ps = (t_ps > centre) ? t_ps - centre : centre - t_ps;
        check(t_ps - centre < TOL_PS && centre - t_ps < TOL_PS,
              $sformatf("ch%0d bin %0d: %0.1f ps, true centre %0.1f ps", c, i, t_ps, centre));
      end
    end
    check(sum == W, $sformatf("ch%0d window holds %0d events", c, sum));
  endtask

  initial begin : stim
    int cur;
    int unsigned upd0 [NCH];
    cum[0] = 0;
    for (int k = 0; k < N; k++) cum[k+1] = cum[k] + D[k % 4];
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    cal_src_ro = 1'b1;
    while (cal_steady != '1) @(negedge clk);
    for (int i = 0; i < 2000 && (cal_valid != '1 || cal_busy != '0); i++) @(negedge clk);
    cal_src_ro = 1'b0;
    repeat (10) @(negedge clk);
    while (cal_busy != '0) @(negedge clk);
    check(cal_valid == '1, "tables valid after static calibration");
    check(buf_words == 0, "no tags stored during the ring-oscillator calibration");
    for (int c = 0; c < NCH; c++) check_table(c);
    $display("static calibration: N_c = %0d / %0d, worst bin-centre error %0.2f ps",
             cal_nc[0], cal_nc[1], worst_ps);
    for (int c = 0; c < NCH; c++) upd0[c] = cal_updates[c];
    // detector hits
    for (int h = 0; h < NHITS; h++) begin
      int o, delta, n, k, cap;
      @(posedge clk);
      k = int'(($time - HALF) / T);
      do begin
        o = int'($urandom_range(1, T - 1));
        delta = T - o;
        cap = k + 1;
        n = taps(delta);
        if (n == 0) begin n = taps(delta + T); cap = k + 2; end
      end while (n <= 0 || (cap == k + 1 && taps(delta + T) < 0));
      #o hit_in = '1;
      for (int c = 0; c < NCH; c++) begin
        q_fine[c].push_back(n);
        q_edge[c].push_back(longint'(cap));
      end
      #5000 hit_in = '0;
      repeat (3 + $urandom_range(0, 20)) @(posedge clk);
    end
    repeat (20) @(negedge clk);
    // request-style read-out of everything written
    cur = int'(buf_wr_addr);
    check(cur == 2 * NHITS, $sformatf("write address %0d after %0d hits", cur, NHITS));
    for (int a = 0; a < cur; a++) begin
      tag_t t;
      int c;
      buf_rd_en = 1'b1; buf_rd_addr = AW'(a);
      @(negedge clk);
      buf_rd_en = 1'b0;
      t = buf_rd_data;
      c = int'(t.chan);
      if (c >= NCH || q_fine[c].size() == 0) check(1'b0, "unexpected tag");
      else begin
        int f; longint e;
        f = q_fine[c].pop_front();
        e = q_edge[c].pop_front();
        if (coarse_off < 0) coarse_off = longint'(t.coarse) - e;
        check(t.fine == 8'(f), $sformatf("ch%0d fine %0d exp %0d", c, t.fine, f));
        check(longint'(t.coarse) == e + coarse_off, "coarse");
      end
    end
    check(q_fine[0].size() == 0 && q_fine[1].size() == 0, "all tags read");
    for (int c = 0; c < NCH; c++)
      check(cal_updates[c] > upd0[c], $sformatf("ch%0d steady updates: %0d", c, cal_updates[c] - upd0[c]));
    check(!irq_half && !irq_full && !buf_overrun && merge_drops == 0, "buffer state");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (700000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
