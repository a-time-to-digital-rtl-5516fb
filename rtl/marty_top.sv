`timescale 1ps/1ps
// marty_top: multichannel FPGA time-to-digital converter with steady
// calibration and a double-buffered tag memory.
//
// Per channel c (NUM_CH = 2, as in the characterised device):
//   input select -> tdl_model (delay line + sampling flip-flops)
//               -> tdc_channel (hit detection, ones-count decoder, 48-bit
//                  coarse counter, raw tag {c, coarse, fine})
//               -> steady_cal (code-density histogram over the last 2^17
//                  fine codes and the calibrated-time table)
// and for all channels: tag_merger -> tag_buffer (block RAM double buffer
// with half/full interrupts, read by the processor).
// The input of every delay line is either its hit input (the single-photon
// detector) or, while cal_src_ro is high, the on-chip ring oscillator, which
// is how a classic static code-density calibration is taken; with steady
// calibration the detector hits themselves keep the table current and
// cal_src_ro can stay low. Tags are stored uncalibrated; the processor reads
// each channel's table and converts fine codes to time (see steady_cal).
// The processor system (interrupt handling, DMA, Ethernet) is outside this
// module: its interface is the buffer read port, wr_addr and the interrupts.
//
// The delay line and ring oscillator are behavioural models, so this top
// level simulates (with timing) but only its digital sub-blocks synthesize.
// All logic runs on the sample clock clk (412.5 MHz in the published
// design); one clock domain for the processor side is this design's
// simplification.
//
// BUBBLE_EVERY (model bubble errors) and CNT_W (coarse counter width, 48)
// exist so that tests can provoke bubbles and a counter roll-over.
// Reading a calibration table: cal_rd_ch/cal_rd_addr in, cal_rd_t and
// cal_rd_hist valid one clock later.
module marty_top
  import marty_pkg::*;
#(
  parameter int unsigned NUM_CH     = 2,
  parameter int unsigned NTAPS      = marty_pkg::N_TAPS,
  parameter int unsigned LOG2_N     = marty_pkg::LOG2_N_EVENTS,
  parameter int unsigned BUF_DEPTH  = 16384,
  parameter int unsigned RO_HALF_PS = 3967,
  parameter int unsigned DELAY_PCT  = 100,
  parameter int unsigned BUBBLE_EVERY = 0,
  parameter int unsigned CNT_W      = marty_pkg::COARSE_W,
  parameter int unsigned BUF_AW     = $clog2(BUF_DEPTH),
  parameter int unsigned CODE_W     = $clog2(NTAPS + 1),
  parameter int unsigned T_W        = LOG2_N + 2,
  parameter int unsigned HIST_W     = LOG2_N + 1,
  parameter int unsigned CH_AW      = (NUM_CH > 1) ? $clog2(NUM_CH) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // detector inputs and acquisition control
  input  logic [NUM_CH-1:0]              hit_in,
  input  logic                           cal_src_ro,
  input  logic                           coarse_clr,
  input  logic [NUM_CH-1:0]              cal_restart,
  // processor side of the tag buffer
  input  logic                           buf_rd_en,
  input  logic [BUF_AW-1:0]              buf_rd_addr,
  output logic [TAG_W-1:0]               buf_rd_data,
  output logic [BUF_AW-1:0]              buf_wr_addr,
  output logic                           irq_half,
  output logic                           irq_full,
  input  logic                           ack_half,
  input  logic                           ack_full,
  output logic                           buf_overrun,
  output logic [63:0]                    buf_words,
  output logic [15:0]                    merge_drops,
  // calibration status and table read
  output logic [NUM_CH-1:0]              cal_steady,
  output logic [NUM_CH-1:0]              cal_valid,
  output logic [NUM_CH-1:0]              cal_busy,
  output logic [NUM_CH-1:0][CODE_W-1:0]  cal_nc,
  output logic [NUM_CH-1:0][31:0]        cal_updates,
  input  logic [CH_AW-1:0]               cal_rd_ch,
  input  logic [CODE_W-1:0]              cal_rd_addr,
  output logic [T_W-1:0]                 cal_rd_t,
  output logic [HIST_W-1:0]              cal_rd_hist,
  // coarse counter roll-over pulses
  output logic [NUM_CH-1:0]              coarse_wrap
);

  logic                  ro;
  logic [NUM_CH-1:0]     tdl_in;
  logic [NTAPS-1:0]      snap [NUM_CH];
  logic [NUM_CH-1:0]     tag_valid;
  logic [NUM_CH-1:0]     acq_valid;
  tag_t                  tag [NUM_CH];
  logic [T_W-1:0]        rd_t [NUM_CH];
  logic [HIST_W-1:0]     rd_hist [NUM_CH];
  logic [CH_AW-1:0]      rd_ch_q;
  logic                  m_valid;
  tag_t                  m_tag;

  ring_osc_model #(.HALF_PS(RO_HALF_PS)) u_ro (
    .en     (cal_src_ro),
    .ro_out (ro)
  );

  assign tdl_in = cal_src_ro ? {NUM_CH{ro}} : hit_in;

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    cal_state_e st;

    tdl_model #(.N_TAPS(NTAPS), .DELAY_PCT(DELAY_PCT), .BUBBLE_EVERY(BUBBLE_EVERY)) u_tdl (
      .clk      (clk),
      .sig_in   (tdl_in[c]),
      .snapshot (snap[c])
    );

    tdc_channel #(.N_TAPS(NTAPS), .CHAN(c), .CNT_W(CNT_W)) u_ch (
      .clk         (clk),
      .rst_n       (rst_n),
      .snapshot    (snap[c]),
      .coarse_clr  (coarse_clr),
      .tag_valid   (tag_valid[c]),
      .tag         (tag[c]),
      .coarse_wrap (coarse_wrap[c])
    );

    steady_cal #(.N_BINS(NTAPS + 1), .LOG2_N(LOG2_N)) u_cal (
      .clk       (clk),
      .rst_n     (rst_n),
      .restart   (cal_restart[c]),
      .ev_valid  (tag_valid[c]),
      .ev_code   (CODE_W'(tag[c].fine)),
      .state     (st),
      .cal_valid (cal_valid[c]),
      .busy      (cal_busy[c]),
      .n_c       (cal_nc[c]),
      .updates   (cal_updates[c]),
      .rd_addr   (cal_rd_addr),
      .rd_t      (rd_t[c]),
      .rd_hist   (rd_hist[c])
    );

    assign cal_steady[c] = (st == CAL_STEADY);
  end

  always_ff @(posedge clk) rd_ch_q <= cal_rd_ch;
  assign cal_rd_t    = rd_t[rd_ch_q];
  assign cal_rd_hist = rd_hist[rd_ch_q];

  // While the ring oscillator drives the lines, acquisition is stopped: its
  // hits feed the calibration but are not stored as tags. The stop lasts
  // RO_FLUSH clocks longer than cal_src_ro, the time a hit takes from the
  // line input to tag_valid (1 sampling + 4 channel clocks, plus margin).
  localparam int unsigned RO_FLUSH = 6;
  logic [RO_FLUSH-1:0] ro_sel_q;

  always_ff @(posedge clk) begin
    if (!rst_n) ro_sel_q <= '0;
    else        ro_sel_q <= {ro_sel_q[RO_FLUSH-2:0], cal_src_ro};
  end

  assign acq_valid = (cal_src_ro || ro_sel_q != '0) ? '0 : tag_valid;

  tag_merger #(.NUM_CH(NUM_CH)) u_merge (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (acq_valid),
    .in_tag    (tag),
    .out_valid (m_valid),
    .out_tag   (m_tag),
    .drops     (merge_drops)
  );

  tag_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (m_valid),
    .in_tag   (m_tag),
    .rd_en    (buf_rd_en),
    .rd_addr  (buf_rd_addr),
    .rd_data  (buf_rd_data),
    .wr_addr  (buf_wr_addr),
    .irq_half (irq_half),
    .irq_full (irq_full),
    .ack_half (ack_half),
    .ack_full (ack_full),
    .overrun  (buf_overrun),
    .words    (buf_words)
  );

endmodule
