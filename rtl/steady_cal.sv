`timescale 1ps/1ps
// steady_cal: code-density calibration of one TDC channel, kept up to date
// with every detected event ("steady calibration").
//
// Idea. If hits arrive uniformly in time relative to the sample clock, the
// number w_i of hits that decode to fine bin i is proportional to that bin's
// delay. From a window of W = 2^LOG2_N events (131072 in the published
// design, the power of two just above the 75744 events that a 10 % tolerance
// at 98 % confidence needs) the calibrated time of bin i, in units of the
// clock period T, is the centre of the bin:
//     t_c(0) = 0
//     t_c(1) = (w_1 + w_Nc) / 2 / W          (N_c = last bin with counts)
//     t_c(i) = (w_i / 2 + sum_{j<i} w_j) / W  for i > 1.
// Because W is a power of two no division is needed: the table holds
//     T_i = 2 * t_c(i) * W = w_i + 2 * sum_{j<i} w_j   (T_1 = w_1 + w_Nc)
// so that t_c(i) = T_i * T / 2^(LOG2_N+1), an unsigned fraction of the period.
//
// Operation (the state is a cal_state_e):
//   CAL_STATIC  after reset or restart: the first W events fill the window
//               and the histogram, the static code-density test. No event is
//               removed. When the window is full the state becomes CAL_STEADY.
//   CAL_STEADY  each new event overwrites the oldest one in the window (a
//               circular buffer, so the oldest entry sits at the write
//               pointer): the histogram gains the new bin and loses the old.
// After any histogram change in CAL_STEADY (and once at the end of
// CAL_STATIC) the table is recomputed. The window and the formulas follow
// the published method, which was run offline on recorded tags; computing it
// in the fabric as below is this design's own realisation:
//   - the histogram is a register array, updated one cycle after the window
//     memory (a simple dual-port RAM read before written) gives the old code;
//   - a sweep copies the histogram into a shadow, finds N_c in one cycle and
//     then writes one table entry per clock into the idle one of two table
//     banks, swapping banks at the end: readers always see a whole table;
//   - events arriving during a sweep update the histogram and trigger one
//     more sweep afterwards, so at high rates several events share a sweep.
// Events with code 0 (no tap crossed) or code >= N_BINS are ignored.
//
// Ports: ev_valid/ev_code is the stream of fine codes (one per clock at
// most); restart starts a new static calibration; rd_addr reads rd_t (table
// entry T_i) and rd_hist (w_i) one clock later; cal_valid rises after the
// first complete table; n_c is N_c of the current table; updates counts the
// tables produced; busy is high while a sweep runs or is due, i.e. while
// the table does not yet reflect every event received.
// Timing: a sweep lasts N_BINS + 2 clocks (147 at the defaults, 356 ns at
// 412.5 MHz, far below the ~2.5 us between events at 400 kevents/s).
module steady_cal
  import marty_pkg::cal_state_e, marty_pkg::CAL_STATIC, marty_pkg::CAL_STEADY;
#(
  parameter int unsigned N_BINS = marty_pkg::N_TAPS + 1,
  parameter int unsigned LOG2_N = marty_pkg::LOG2_N_EVENTS,
  parameter int unsigned CODE_W = $clog2(N_BINS),
  parameter int unsigned HIST_W = LOG2_N + 1,
  parameter int unsigned T_W    = LOG2_N + 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              restart,
  input  logic              ev_valid,
  input  logic [CODE_W-1:0] ev_code,
  output cal_state_e        state,
  output logic              cal_valid,
  output logic              busy,
  output logic [CODE_W-1:0] n_c,
  output logic [31:0]       updates,
  input  logic [CODE_W-1:0] rd_addr,
  output logic [T_W-1:0]    rd_t,
  output logic [HIST_W-1:0] rd_hist
);

  localparam int unsigned DEPTH = 1 << LOG2_N;

  // ---------------------------------------------------------------- window
  logic [CODE_W-1:0] win [DEPTH];
  logic [LOG2_N-1:0] wp;
  logic              accept;
  logic              s2_valid, s2_remove;
  logic [CODE_W-1:0] s2_new, s2_old;

  assign accept = ev_valid && (ev_code != '0) && (32'(ev_code) < N_BINS);

  // Window memory: read-before-write at the write pointer.
  always_ff @(posedge clk) begin
    if (accept) begin
      s2_old  <= win[wp];
      win[wp] <= ev_code;
    end
    s2_new <= ev_code;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      wp        <= '0;
      state     <= CAL_STATIC;
      s2_valid  <= 1'b0;
      s2_remove <= 1'b0;
    end else begin
      s2_valid  <= accept;
      s2_remove <= (state == CAL_STEADY);
      if (accept) begin
        wp <= wp + 1'b1;
        if (state == CAL_STATIC && wp == LOG2_N'(DEPTH - 1)) state <= CAL_STEADY;
      end
    end
  end

  // ------------------------------------------------------------- histogram
  logic [HIST_W-1:0] hist [N_BINS];
  logic              dirty;
  logic              sweep_start;

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      for (int unsigned i = 0; i < N_BINS; i++) hist[i] <= '0;
    end else if (s2_valid) begin
      if (!s2_remove) begin
        hist[s2_new] <= hist[s2_new] + 1'b1;
      end else if (s2_new != s2_old) begin
        hist[s2_new] <= hist[s2_new] + 1'b1;
        hist[s2_old] <= hist[s2_old] - 1'b1;
      end
    end
  end

  // ----------------------------------------------------------------- sweep
  typedef enum logic [1:0] {SW_IDLE, SW_NC, SW_RUN} sweep_e;
  sweep_e            sw;
  logic [HIST_W-1:0] shadow [N_BINS];
  logic [CODE_W-1:0] idx;
  logic [CODE_W-1:0] nc_q;
  logic [HIST_W-1:0] w_nc;
  logic [T_W-1:0]    cum;       // sum_{j=1}^{idx-1} w_j
  logic [T_W-1:0]    t_val;
  logic              bank;      // bank that readers use
  logic [T_W-1:0]    tbl [2][N_BINS];
  logic [CODE_W-1:0] nc_comb;

  assign sweep_start = dirty && (state == CAL_STEADY) && (sw == SW_IDLE);
  assign busy        = (sw != SW_IDLE) || (dirty && state == CAL_STEADY);

  always_comb begin
    nc_comb = '0;
    for (int unsigned i = 0; i < N_BINS; i++) begin
      if (shadow[i] != '0) nc_comb = CODE_W'(i);
    end
  end

  always_comb begin
    if (idx == '0)      t_val = '0;
    else if (idx == 1)  t_val = T_W'(shadow[1]) + T_W'(w_nc);
    else                t_val = T_W'(shadow[idx]) + (cum << 1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      dirty <= 1'b0;
      sw    <= SW_IDLE;
      idx   <= '0;
      cum   <= '0;
    end else begin
      dirty <= (dirty && !sweep_start) || s2_valid;
      case (sw)
        SW_IDLE: if (sweep_start) sw <= SW_NC;
        SW_NC: begin
          sw  <= SW_RUN;
          idx <= '0;
          cum <= '0;
        end
        SW_RUN: begin
          if (idx != '0) cum <= cum + T_W'(shadow[idx]);
          idx <= idx + 1'b1;
          if (32'(idx) == N_BINS - 1) sw <= SW_IDLE;
        end
        default: sw <= SW_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (sweep_start) begin
      for (int unsigned i = 0; i < N_BINS; i++) shadow[i] <= hist[i];
    end
    if (sw == SW_NC) begin
      nc_q <= nc_comb;
      w_nc <= shadow[nc_comb];
    end
  end

  // Table banks: written by the sweep, bank swapped when a sweep ends.
  always_ff @(posedge clk) begin
    if (sw == SW_RUN) tbl[~bank][idx] <= t_val;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bank      <= 1'b0;
      cal_valid <= 1'b0;
      n_c       <= '0;
      updates   <= '0;
    end else if (sw == SW_RUN && 32'(idx) == N_BINS - 1 && !restart) begin
      bank      <= ~bank;
      cal_valid <= 1'b1;
      n_c       <= nc_q;
      updates   <= updates + 1'b1;
    end
  end

  // Read port.
  always_ff @(posedge clk) begin
    rd_t    <= tbl[bank][rd_addr];
    rd_hist <= hist[rd_addr];
  end

  // In the sliding phase the window always holds exactly W events.
  property p_hist_bounded;
    @(posedge clk) disable iff (!rst_n)
      s2_valid && s2_remove |-> hist[s2_old] != '0;
  endproperty
  a_hist_bounded: assert property (p_hist_bounded)
    else $error("steady_cal: removing an event from an empty bin");

endmodule
