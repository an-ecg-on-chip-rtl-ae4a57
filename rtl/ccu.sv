// ccu: central control unit.
//
// System-clock side (the crystal clock that also paces the ADC):
//   * a divider makes the 256 Hz sample strobe (DIV system clocks);
//   * on each strobe it starts an ADC conversion; it tells the QRS detector
//     (which takes the code straight from the ADC) when a code is ready
//     (qrs_valid), and frames each finished code into a FIFO word
//     {qrs_flag, TAG_ECG, code}, where qrs_flag marks that an R peak was
//     detected since the previous word; every heart-rate update is framed
//     as {0, TAG_HR, rate} and written after it;
//   * the CCU state machine watches the FIFO usage, interrupts the host and
//     locks writes when Full;
//   * it drives the front-end amplifier: the S1/S2 settling switches are
//     closed for AFE_RST_TICKS samples after reset (and whenever the host
//     sets the control bit), and the PGA gain code comes from the control
//     register.
// Host side (clocked by the SPI clock, which the SPI slave extracts):
//   * the 16-bit command of each SPI frame is decoded at its last bit:
//     read a FIFO word, read status, write the control register or soft
//     reset (codes in ecg_pkg);
//   * the word shifted out in the next frame is the FIFO word popped by a
//     read command, or else the status word
//     {3'b111, empty, nearly_empty, full, used[9:0]}.
// Crossings: the control register is quasi-static and passes through a
// two-flop synchroniser; soft reset crosses as a toggle; the FIFO crosses
// with Gray pointers. Command decoding, the sample framing, the FIFO with
// Gray pointers and the state machine follow the chip description; the
// command codes, word layouts, control bits and startup time are this
// design's choices.
module ccu
  import ecg_pkg::*;
#(
  parameter int unsigned DIV           = 128,   // system clocks per sample
  parameter int unsigned DEPTH         = 512,   // FIFO words
  parameter int unsigned AFE_RST_TICKS = 256,   // startup settling samples
  localparam int unsigned AW           = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // LNA interface
  output logic               afe_rst,
  output logic [2:0]         pga_gain,
  // ADC interface
  output logic               adc_start,
  input  logic               adc_done,
  input  logic [ADC_W-1:0]   adc_code,
  // QRS interface
  output logic               qrs_valid,
  input  logic               qrs_pulse,
  input  logic               hr_valid,
  input  logic [11:0]        heart_rate,
  // host
  output logic               irq,
  output ccu_state_e         state,
  // SPI side (sclk domain)
  input  logic               sclk,
  input  logic               cmd_stb,      // last bit of a command frame
  input  logic [WORD_W-1:0]  cmd_word,
  output logic [WORD_W-1:0]  tx_word
);

  // ============ system clock domain ============
  localparam int unsigned DW_ = $clog2(DIV);
  localparam int unsigned SW_ = $clog2(AFE_RST_TICKS + 1);

  logic [DW_-1:0]  div_cnt;
  logic            tick;
  logic [SW_-1:0]  startup_cnt;
  ctrl_reg_t       ctrl_s1, ctrl_s2;       // synchronised control register
  logic [2:0]      srst_sync;
  logic            srst;
  logic            qrs_seen;
  logic            hr_pend;
  logic [11:0]     hr_q;
  logic            wr_en;
  logic [WORD_W-1:0] wr_data;
  logic            wr_full, wr_nearly_full, wr_lock;
  logic [AW:0]     wr_used;

  // SPI clock domain state, declared here as both sides use it
  ctrl_reg_t     ctrl_q;
  logic          srst_tog;
  logic          sel_fifo;
  logic          rd_en;
  logic [WORD_W-1:0] rd_data;
  logic          rd_empty, rd_nearly_empty;
  logic [AW:0]   rd_used;
  spi_cmd_e      cmd;

  assign tick = (div_cnt == DW_'(DIV - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt     <= '0;
      startup_cnt <= '0;
      ctrl_s1     <= CTRL_RESET;
      ctrl_s2     <= CTRL_RESET;
      srst_sync   <= '0;
      qrs_seen    <= 1'b0;
      hr_pend     <= 1'b0;
      hr_q        <= '0;
    end else begin
      div_cnt   <= tick ? '0 : div_cnt + 1'b1;
      if (tick && startup_cnt != SW_'(AFE_RST_TICKS)) startup_cnt <= startup_cnt + 1'b1;
      ctrl_s1   <= ctrl_q;
      ctrl_s2   <= ctrl_s1;
      srst_sync <= {srst_sync[1:0], srst_tog};
      // framing state
      if (adc_done)       qrs_seen <= qrs_pulse;
      else if (qrs_pulse) qrs_seen <= 1'b1;
      if (hr_valid) begin
        hr_pend <= 1'b1;
        hr_q    <= heart_rate;
      end else if (!adc_done) begin
        hr_pend <= 1'b0;
      end
    end
  end

  assign srst      = srst_sync[2] ^ srst_sync[1];
  assign afe_rst   = (startup_cnt != SW_'(AFE_RST_TICKS)) || ctrl_s2.afe_rst;
  assign pga_gain  = ctrl_s2.pga_gain;
  assign adc_start = tick && ctrl_s2.acq_en;
  assign qrs_valid = adc_done && ctrl_s2.qrs_en;

  // FIFO write: an ECG word on each conversion, else a pending heart rate.
  always_comb begin
    if (adc_done)     wr_data = {qrs_seen | qrs_pulse, TAG_ECG, adc_code};
    else              wr_data = {1'b0, TAG_HR, hr_q};
    wr_en = (adc_done || hr_pend) && !wr_lock;
  end

  ccu_fsm #(.DEPTH(DEPTH)) u_fsm (
    .clk, .rst_n, .f_use(wr_used), .srst, .state, .irq, .wr_lock);

  // ============ SPI clock domain ============

  assign cmd   = spi_cmd_e'(cmd_word[15:12]);
  assign rd_en = cmd_stb && (cmd == CMD_RDFIFO);

  always_ff @(posedge sclk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl_q   <= CTRL_RESET;
      srst_tog <= 1'b0;
      sel_fifo <= 1'b0;
    end else if (cmd_stb) begin
      sel_fifo <= (cmd == CMD_RDFIFO) && !rd_empty;
      if (cmd == CMD_WRCTRL) ctrl_q   <= ctrl_reg_t'({4'b0, cmd_word[11:0]});
      if (cmd == CMD_SRST)   srst_tog <= ~srst_tog;
    end
  end

  assign tx_word = sel_fifo ? rd_data
                            : {TAG_STATUS, rd_empty, rd_nearly_empty,
                               rd_used == (AW+1)'(DEPTH), 10'(rd_used)};

  async_fifo #(.DEPTH(DEPTH), .W(WORD_W)) u_fifo (
    .wclk(clk), .wrst_n(rst_n), .wr_en, .wr_data,
    .wr_full, .wr_nearly_full, .wr_used,
    .rclk(sclk), .rrst_n(rst_n), .rd_en, .rd_data,
    .rd_empty, .rd_nearly_empty, .rd_used);

endmodule
