// dpsram: dual-port SRAM bank, one write port and one read port, each with
// its own clock.
//
// The chip buffers samples in two 256 x 16 dual-port SRAM macros (512 x 16,
// 8 Kb in all). This is a synthesizable array model of one such bank: a
// write on the write clock when we is high; a synchronous read on the read
// clock when re is high, the word appearing on rdata after that edge and
// held until the next read. Sizes follow the chip; the port timing is this
// design's choice.
module dpsram #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned W     = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          wclk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          rclk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge wclk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge rclk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
