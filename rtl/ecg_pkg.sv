// ecg_pkg: types and constants shared by the ECG-on-Chip digital core.
//
// The 12-bit ADC resolution, the 256 Hz sample rate, the 25-sample
// morphological window, the 0.3125 threshold factor, the 0..511 training
// count and the 512 x 16 sample buffer are numbers given for the chip.
// The FIFO word layout, the SPI command codes and the control register
// layout are choices of this implementation (the chip's encodings are not
// published).
package ecg_pkg;

  localparam int unsigned ADC_W     = 12;   // SAR ADC resolution
  localparam int unsigned QRS_W     = 11;   // width out of the comparator tree
  localparam int unsigned WORD_W    = 16;   // SRAM / FIFO / SPI word

  // FIFO word: {qrs_flag, tag[2:0], payload[11:0]}
  typedef enum logic [2:0] {
    TAG_ECG    = 3'b000,   // payload = raw ADC code of one sample
    TAG_HR     = 3'b001,   // payload = heart rate (R peaks in the last 60 s)
    TAG_STATUS = 3'b111    // never stored: status word returned over SPI
  } word_tag_e;

  // Commands carried in the top nibble of a 16-bit SPI command frame.
  typedef enum logic [3:0] {
    CMD_NOP    = 4'h0,
    CMD_RDFIFO = 4'h1,     // next frame returns one FIFO word (pops it)
    CMD_RDSTAT = 4'h2,     // next frame returns the status word
    CMD_WRCTRL = 4'h3,     // control register <= command[11:0]
    CMD_SRST   = 4'h4      // soft reset of the CCU state machine
  } spi_cmd_e;

  // Control register written by CMD_WRCTRL.
  typedef struct packed {
    logic [5:0] rsvd;
    logic       qrs_en;     // [5] run the QRS detector
    logic       acq_en;     // [4] sample the ADC and store into the FIFO
    logic       afe_rst;    // [3] close S1/S2 of the front-end amplifier
    logic [2:0] pga_gain;   // [2:0] PGA gain code
  } ctrl_reg_t;

  localparam ctrl_reg_t CTRL_RESET = '{rsvd: '0, qrs_en: 1'b1, acq_en: 1'b1,
                                       afe_rst: 1'b0, pga_gain: 3'd0};

  // CCU state machine states (Fig. 10 of the chip description).
  typedef enum logic [1:0] {
    ST_EMPTY    = 2'd0,
    ST_READY    = 2'd1,
    ST_CRITICAL = 2'd2,
    ST_FULL     = 2'd3
  } ccu_state_e;

endpackage
