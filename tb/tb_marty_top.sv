`timescale 1ps/1ps
// tb_marty_top: end-to-end test of the two-channel TDC at reduced sizes
// (64-event calibration window, 64-word tag buffer, 12-bit coarse counter,
// a bubble on every 5th snapshot).
//   1. Static calibration from the ring oscillator (acquisition stopped: no
//      tags may reach the buffer); both channels must reach steady state.
//   2. Detector phase: one detector pulse split to both channels at a chosen
//      phase of the clock. The expected fine code is computed from the tap
//      delay pattern, the expected coarse from the clock-edge index. A
//      processor model drains each half of the buffer on its interrupt and
//      checks every tag; a final request-style read takes the rest.
//   3. Channel 1 restarts its calibration mid-run (static from detector
//      hits); at the end each channel's table must equal the reference table
//      of its last 64 expected fine codes.
// Mechanisms counted (each must occur): RO calibration, static->steady,
// steady table updates, restart, bubbles, irq_half, irq_full, request
// read-out, coarse roll-over.
module tb_marty_top;
  import marty_pkg::*;
  localparam int NCH = 2, L2 = 6, WIN = 1 << L2, DEPTH = 64, AW = 6, CNTW = 12;
  localparam int T = 2424, HALF = 1212, N = 144;
  localparam int D[4] = '{8, 30, 12, 24};
  localparam int NHITS = 600;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NCH-1:0] hit_in = '0, cal_restart = '0;
  logic cal_src_ro = 1'b0, coarse_clr = 1'b0;
  logic buf_rd_en = 1'b0;
  logic [AW-1:0] buf_rd_addr = '0, buf_wr_addr;
  logic [63:0] buf_rd_data, buf_words;
  logic irq_half, irq_full, ack_half = 1'b0, ack_full = 1'b0, buf_overrun;
  logic [15:0] merge_drops;
  logic [NCH-1:0] cal_steady, cal_valid, cal_busy, coarse_wrap;
  logic [NCH-1:0][7:0] cal_nc;
  logic [NCH-1:0][31:0] cal_updates;
  logic cal_rd_ch = 1'b0;
  logic [7:0] cal_rd_addr = '0;
  logic [L2+1:0] cal_rd_t;
  logic [L2:0] cal_rd_hist;

  marty_top #(.NUM_CH(NCH), .LOG2_N(L2), .BUF_DEPTH(DEPTH), .CNT_W(CNTW), .BUBBLE_EVERY(5)) dut (
    .clk(clk), .rst_n(rst_n), .hit_in(hit_in), .cal_src_ro(cal_src_ro), .coarse_clr(coarse_clr),
    .cal_restart(cal_restart), .buf_rd_en(buf_rd_en), .buf_rd_addr(buf_rd_addr),
    .buf_rd_data(buf_rd_data), .buf_wr_addr(buf_wr_addr), .irq_half(irq_half), .irq_full(irq_full),
    .ack_half(ack_half), .ack_full(ack_full), .buf_overrun(buf_overrun), .buf_words(buf_words),
    .merge_drops(merge_drops), .cal_steady(cal_steady), .cal_valid(cal_valid), .cal_busy(cal_busy),
    .cal_nc(cal_nc), .cal_updates(cal_updates), .cal_rd_ch(cal_rd_ch), .cal_rd_addr(cal_rd_addr),
    .cal_rd_t(cal_rd_t), .cal_rd_hist(cal_rd_hist), .coarse_wrap(coarse_wrap));

  always #HALF clk = ~clk;

  int checks = 0, failures = 0;
  int cum [N+1];
  int exp_fine [NCH][$];     // every detector hit, per channel, for the tables
  int exp_edge [NCH][$];     // capture-edge index, per channel, for the tags
  int q_fine [NCH][$];       // tags not yet read from the buffer
  longint q_edge [NCH][$];
  longint coarse_off = -1;
  int n_irq_half = 0, n_irq_full = 0, n_request = 0, n_wraps = 0, n_bubbles = 0;
  int n_static_done = 0, n_ro_cal = 0, n_restart = 0, tags_read = 0;
  int unsigned steady_updates0 = 0;
  int prev_addr = 0;
  bit hits_done = 1'b0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // taps crossed when the edge entered delta ps before the sample; -1 = tie
  function automatic int taps(int delta);
    int n = 0;
    for (int k = 1; k <= N; k++) begin
      if (cum[k] == delta) return -1;
      if (cum[k] < delta) n = k;
    end
    return n;
  endfunction

  // ---------------------------------------------------------- monitors
  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < NCH; c++) begin
        logic [N-1:0] s;
        s = dut.snap[c];
        if ((s & (s + 1'b1)) != '0) n_bubbles++;
        if (coarse_wrap[c]) n_wraps++;
      end
    end
  end

  logic [NCH-1:0] steady_q = '0;
  always @(negedge clk) begin
    for (int c = 0; c < NCH; c++) if (cal_steady[c] && !steady_q[c]) n_static_done++;
    steady_q <= cal_steady;
  end

  // ------------------------------------------------------ processor model
  task automatic read_word(int a);
    tag_t t;
    int c;
    buf_rd_en = 1'b1; buf_rd_addr = AW'(a);
    @(negedge clk);
    buf_rd_en = 1'b0;
    t = buf_rd_data;
    c = int'(t.chan);
    tags_read++;
    if (c >= NCH || q_fine[c].size() == 0) check(1'b0, $sformatf("unexpected tag at %0d", a));
    else begin
      int f; longint e, exp_c;
      f = q_fine[c].pop_front();
      e = q_edge[c].pop_front();
      if (coarse_off < 0) coarse_off = (longint'(t.coarse) - e) & ((1 << CNTW) - 1);
      exp_c = (e + coarse_off) & ((1 << CNTW) - 1);
      check(t.fine == 8'(f), $sformatf("ch%0d fine %0d exp %0d", c, t.fine, f));
      check(t.coarse == 48'(exp_c), $sformatf("ch%0d coarse %0d exp %0d", c, t.coarse, exp_c));
    end
  endtask

  initial begin : cpu
    forever begin
      @(negedge clk);
      if (irq_half) begin
        n_irq_half++;
        for (int a = 0; a < DEPTH / 2; a++) read_word(a);
        prev_addr = DEPTH / 2;
        ack_half = 1'b1; @(negedge clk); ack_half = 1'b0;
      end else if (irq_full) begin
        n_irq_full++;
        for (int a = DEPTH / 2; a < DEPTH; a++) read_word(a);
        prev_addr = 0;
        ack_full = 1'b1; @(negedge clk); ack_full = 1'b0;
      end else if (hits_done) begin
        // request-based read-out: everything from the previous address on
        int cur;
        cur = int'(buf_wr_addr);
        n_request++;
        for (int a = prev_addr; a != cur; a = (a + 1) % DEPTH) read_word(a);
        prev_addr = cur;
        hits_done = 1'b0;
      end
    end
  end

  // ---------------------------------------------------------- stimulus
  task automatic compare_table(int c);
    int w [N+1];
    int nc, cs, e, sz;
    foreach (w[i]) w[i] = 0;
    sz = exp_fine[c].size();
    for (int k = sz - WIN; k < sz; k++) w[exp_fine[c][k]]++;
    nc = 0;
    for (int i = 0; i <= N; i++) if (w[i] != 0) nc = i;
    check(cal_nc[c] == 8'(nc), $sformatf("ch%0d N_c %0d exp %0d", c, cal_nc[c], nc));
    cs = 0;
    cal_rd_ch = 1'(c);
    for (int i = 0; i <= N; i++) begin
      if (i == 0) e = 0;
      else if (i == 1) e = w[1] + w[nc];
      else e = w[i] + 2 * cs;
      if (i >= 1) cs += w[i];
      cal_rd_addr = 8'(i);
      @(negedge clk);
      check(cal_rd_t == (L2+2)'(e) && cal_rd_hist == (L2+1)'(w[i]),
            $sformatf("ch%0d bin %0d: T %0d exp %0d, w %0d exp %0d", c, i, cal_rd_t, e, cal_rd_hist, w[i]));
    end
  endtask

  initial begin : stim
    cum[0] = 0;
    for (int k = 0; k < N; k++) cum[k+1] = cum[k] + D[k % 4];
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    // 1. static calibration with the ring oscillator
    cal_src_ro = 1'b1;
    n_ro_cal++;
    while (cal_steady != '1) @(negedge clk);
    for (int i = 0; i < 400 && cal_valid != '1; i++) @(negedge clk);
    check(cal_valid == '1, "tables valid after static calibration");
    cal_src_ro = 1'b0;
    repeat (10) @(negedge clk);
    check(buf_words == 0, "no tags stored while the ring oscillator is selected");
    steady_updates0 = cal_updates[0];
    // 2./3. detector hits
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
        exp_fine[c].push_back(n);
        q_fine[c].push_back(n);
        q_edge[c].push_back(longint'(cap));
      end
      #5000 hit_in = '0;
      repeat (2 + $urandom_range(0, 6)) @(posedge clk);
      if (h == 250) begin
        @(negedge clk);
        cal_restart[1] = 1'b1; @(negedge clk); cal_restart[1] = 1'b0;
        n_restart++;
        check(!cal_steady[1], "restarted channel back in static calibration");
        // the new window holds only hits from here on
        exp_fine[1].delete();
      end
    end
    repeat (20) @(negedge clk);
    hits_done = 1'b1;
    while (hits_done) @(negedge clk);
    repeat (5) @(negedge clk);
    check(q_fine[0].size() == 0 && q_fine[1].size() == 0, "every tag read back");
    check(tags_read == 2 * NHITS, $sformatf("%0d tags read for %0d hits", tags_read, NHITS));
    check(merge_drops == 0, $sformatf("merge drops %0d", merge_drops));
    check(!buf_overrun, "no buffer overrun");
    // calibration tables against the reference
    for (int c = 0; c < NCH; c++) begin
      int q;
      q = 0;
      while (q < 3) begin q = cal_busy[c] ? 0 : q + 1; @(negedge clk); end
      compare_table(c);
    end
    // mechanisms
    check(n_ro_cal > 0,              "ring-oscillator calibration ran");
    check(n_static_done >= 3,        $sformatf("static->steady %0d times", n_static_done));
    check(cal_updates[0] - steady_updates0 > 0, "steady table updates from detector hits");
    check(n_restart > 0,             "calibration restart");
    check(n_bubbles > 0,             $sformatf("bubbles seen: %0d", n_bubbles));
    check(n_irq_half > 0,            $sformatf("irq_half: %0d", n_irq_half));
    check(n_irq_full > 0,            $sformatf("irq_full: %0d", n_irq_full));
    check(n_request > 0,             "request read-out");
    check(n_wraps > 0,               $sformatf("coarse roll-overs: %0d", n_wraps));
    $display("mechanisms: ro_cal=%0d static_done=%0d steady_updates=%0d restart=%0d bubbles=%0d irq_half=%0d irq_full=%0d request=%0d wraps=%0d",
             n_ro_cal, n_static_done, cal_updates[0] - steady_updates0, n_restart, n_bubbles,
             n_irq_half, n_irq_full, n_request, n_wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
