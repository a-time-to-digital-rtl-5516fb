`timescale 1ps/1ps
// tb_steady_cal: runs the calibration engine with a 16-event window and 9
// bins against a reference model (a queue of the last 16 codes, its
// histogram and the table formula T_i = w_i + 2*sum_{j<i} w_j,
// T_1 = w_1 + w_Nc). Checks: no table and CAL_STATIC during the first 16
// events; the switch to CAL_STEADY; after each later event a new table
// within N_BINS + 6 clocks, equal to the reference entry by entry, with the
// histogram and N_c; back-to-back bursts; code-0 events ignored; restart.
module tb_steady_cal;
  import marty_pkg::*;
  localparam int NB = 9;
  localparam int L2 = 4;
  localparam int W  = 1 << L2;
  localparam int CW = 4;
  logic clk = 1'b0, rst_n = 1'b0, restart = 1'b0;
  logic ev_valid = 1'b0;
  logic [CW-1:0] ev_code = '0;
  cal_state_e state;
  logic cal_valid, busy;
  logic [CW-1:0] n_c, rd_addr = '0;
  logic [31:0] updates;
  logic [L2+1:0] rd_t;
  logic [L2:0] rd_hist;
  int checks = 0, failures = 0;
  int win [$];

  steady_cal #(.N_BINS(NB), .LOG2_N(L2)) dut (
    .clk(clk), .rst_n(rst_n), .restart(restart), .ev_valid(ev_valid), .ev_code(ev_code),
    .state(state), .cal_valid(cal_valid), .busy(busy), .n_c(n_c), .updates(updates),
    .rd_addr(rd_addr), .rd_t(rd_t), .rd_hist(rd_hist));

  always #1212 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(int code);
    ev_valid = 1'b1; ev_code = CW'(code);
    @(negedge clk);
    ev_valid = 1'b0;
    if (code != 0) begin
      win.push_back(code);
      if (win.size() > W) void'(win.pop_front());
    end
  endtask

  task automatic compare_table();
    int w [NB];
    int nc, cum, e;
    foreach (w[i]) w[i] = 0;
    foreach (win[k]) w[win[k]]++;
    nc = 0;
    for (int i = 0; i < NB; i++) if (w[i] != 0) nc = i;
    check(n_c == CW'(nc), $sformatf("n_c %0d exp %0d", n_c, nc));
    cum = 0;
    for (int i = 0; i < NB; i++) begin
      if (i == 0) e = 0;
      else if (i == 1) e = w[1] + w[nc];
      else e = w[i] + 2 * cum;
      if (i >= 1) cum += w[i];
      rd_addr = CW'(i);
      @(negedge clk);
      check(rd_t == (L2+2)'(e), $sformatf("T[%0d]=%0d exp %0d", i, rd_t, e));
      check(rd_hist == (L2+1)'(w[i]), $sformatf("w[%0d]=%0d exp %0d", i, rd_hist, w[i]));
    end
  endtask

  task automatic await_table(int unsigned prev_upd, int limit);
    int n = 0;
    while (updates == prev_upd && n < limit) begin @(negedge clk); n++; end
    check(updates != prev_upd && n < limit, $sformatf("new table after %0d clocks", n));
    // a further sweep may follow at once when events arrived during this one
    for (int quiet = 0; quiet < 3 && n < 4 * limit; n++) begin
      quiet = busy ? 0 : quiet + 1;
      @(negedge clk);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // static phase
    for (int i = 0; i < W; i++) begin
      check(state == CAL_STATIC && !cal_valid, "static phase, no table yet");
      send(int'($urandom_range(1, NB - 2)) + (i % 5 == 0 ? 1 : 0));
      if (i == 3) send(0);   // ignored
      repeat (2) @(negedge clk);
    end
    check(state == CAL_STEADY, "window full: steady");
    await_table(0, NB + 6);
    compare_table();
    // steady phase, one event at a time
    for (int i = 0; i < 40; i++) begin
      int unsigned u;
      u = updates;
      send(int'($urandom_range(1, (i < 20) ? NB - 1 : 3)));
      await_table(u, NB + 6);
      compare_table();
    end
    // bursts of back-to-back events
    for (int b = 0; b < 5; b++) begin
      int unsigned u;
      u = updates;
      for (int i = 0; i < 7; i++) send(int'($urandom_range(1, NB - 1)));
      await_table(u, 3 * NB + 20);
      repeat (NB + 6) @(negedge clk);
      compare_table();
    end
    // restart: back to a static calibration
    restart = 1'b1; @(negedge clk); restart = 1'b0;
    win.delete();
    check(state == CAL_STATIC, "restart gives static phase");
    for (int i = 0; i < W; i++) send(2 + (i % 4));
    begin
      int unsigned u;
      u = updates;
      await_table(u, NB + 6);
    end
    compare_table();
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
