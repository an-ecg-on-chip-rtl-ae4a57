// spi_slave: duplex SPI slave between the host microcontroller and the CCU.
//
// Three parts, as in the chip's SPI block diagram. Clock extraction: the
// SPI clock, qualified by chip select, clocks both shift registers, and a
// 4-bit bit counter marks the last bit of each 16-bit frame (cmd_stb),
// the strobe that paces the CCU's FIFO-reading side. Input shift register:
// the command link, MOSI sampled on each rising sclk edge, MSB first; at
// the 16th bit the complete command word (the last bit taken straight from
// MOSI) is presented on cmd_word with cmd_stb high, for the CCU to act on
// at that same edge. Output shift register: the data link; on the first
// edge of every frame it loads tx_word (a FIFO word or the status word)
// and then shifts it out MSB first. The 16-bit frame and the edge use are
// this design's choices.
//
// Timing: frames are back to back while cs_n is low; raising cs_n aborts a
// frame and realigns the bit counter. MISO changes after a rising edge and
// is stable for the master at the following falling edge.
module spi_slave #(
  parameter int unsigned W = 16
) (
  input  logic         rst_n,
  input  logic         sclk,
  input  logic         cs_n,
  input  logic         mosi,
  output logic         miso,
  output logic         cmd_stb,
  output logic [W-1:0] cmd_word,
  input  logic [W-1:0] tx_word
);

  localparam int unsigned CW = $clog2(W);

  logic [CW-1:0] bit_cnt;
  logic [W-1:0]  rx_sh;
  logic [W-1:0]  tx_sh;
  logic          clr;

  // Deselect, or chip reset, clears both shift registers and the counter.
  assign clr = cs_n || !rst_n;

  // clock extraction: bit counter, reset while deselected
  always_ff @(posedge sclk or posedge clr) begin
    if (clr) bit_cnt <= '0;
    else      bit_cnt <= bit_cnt + 1'b1;
  end

  assign cmd_stb  = !cs_n && (bit_cnt == CW'(W - 1));
  assign cmd_word = {rx_sh[W-2:0], mosi};

  // input shift register (command link)
  always_ff @(posedge sclk or posedge clr) begin
    if (clr) rx_sh <= '0;
    else      rx_sh <= {rx_sh[W-2:0], mosi};
  end

  // output shift register (data link)
  always_ff @(posedge sclk or posedge clr) begin
    if (clr)               tx_sh <= '0;
    else if (bit_cnt == '0) tx_sh <= tx_word;
    else                    tx_sh <= {tx_sh[W-2:0], 1'b0};
  end

  assign miso = tx_sh[W-1];

endmodule
