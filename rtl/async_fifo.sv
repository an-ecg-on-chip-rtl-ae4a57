// async_fifo: asynchronous FIFO between the sample clock domain (writer)
// and the host/SPI clock domain (reader).
//
// Storage is two 256 x 16 dual-port SRAM banks (512 words, 8 Kb); the most
// significant address bit selects the bank. Read and write pointers are
// binary counters one bit wider than the address. Each pointer is converted
// to Gray code, registered, and passed through a two-flop synchroniser into
// the other domain, where it is converted back to binary for comparison.
// Because only one Gray bit changes per increment, a pointer sampled while
// it changes is either the old or the new value, never a wrong one, so
// full and empty cannot be misjudged into an overflow or underflow. The
// 8 Kb size, the two banks, the binary pointers and their Gray-code
// synchronisation follow the chip description. The flag thresholds are
// this design's choice: nearly full above 75 % and nearly empty below 25 %
// of DEPTH, the same limits the CCU state machine uses.
//
// Interface: a write with wr_en is ignored when full; a read with rd_en is
// ignored when empty (the read pointer is locked). rd_data appears after
// the read clock edge that accepted rd_en and holds until the next read.
// wr_used / rd_used count stored words as seen from each side; the side
// that does not own a pointer sees its changes 2-3 of its own clocks late,
// which only ever makes it more conservative.
module async_fifo #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned W     = 16,
  parameter int unsigned BANKS = 2,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          wclk,
  input  logic          wrst_n,
  input  logic          wr_en,
  input  logic [W-1:0]  wr_data,
  output logic          wr_full,
  output logic          wr_nearly_full,
  output logic [AW:0]   wr_used,

  input  logic          rclk,
  input  logic          rrst_n,
  input  logic          rd_en,
  output logic [W-1:0]  rd_data,
  output logic          rd_empty,
  output logic          rd_nearly_empty,
  output logic [AW:0]   rd_used
);

  localparam int unsigned BW  = $clog2(BANKS);
  localparam int unsigned BAW = AW - BW;           // address bits per bank

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- read-domain state ----------------
  logic [AW:0] rptr_bin, rptr_gray;
  logic [AW:0] wgray_r1, wgray_r2;
  logic [AW:0] wptr_in_r;
  logic        rd_do;
  logic [BW-1:0] rbank_q;

  // ---------------- write domain ----------------
  logic [AW:0] wptr_bin, wptr_gray;
  logic [AW:0] rgray_w1, rgray_w2;
  logic [AW:0] rptr_in_w;
  logic        wr_do;

  assign rptr_in_w      = gray2bin(rgray_w2);
  assign wr_used        = wptr_bin - rptr_in_w;
  assign wr_full        = (wr_used == (AW+1)'(DEPTH));
  assign wr_nearly_full = (wr_used > (AW+1)'(DEPTH * 3 / 4));
  assign wr_do          = wr_en && !wr_full;

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wptr_bin  <= '0;
      wptr_gray <= '0;
      rgray_w1  <= '0;
      rgray_w2  <= '0;
    end else begin
      if (wr_do) begin
        wptr_bin  <= wptr_bin + 1'b1;
        wptr_gray <= bin2gray(wptr_bin + 1'b1);
      end
      rgray_w1 <= rptr_gray;
      rgray_w2 <= rgray_w1;
    end
  end

  // ---------------- read domain ----------------

  assign wptr_in_r       = gray2bin(wgray_r2);
  assign rd_used         = wptr_in_r - rptr_bin;
  assign rd_empty        = (rd_used == '0);
  assign rd_nearly_empty = (rd_used < (AW+1)'(DEPTH / 4));
  assign rd_do           = rd_en && !rd_empty;

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rptr_bin  <= '0;
      rptr_gray <= '0;
      wgray_r1  <= '0;
      wgray_r2  <= '0;
      rbank_q   <= '0;
    end else begin
      if (rd_do) begin
        rptr_bin  <= rptr_bin + 1'b1;
        rptr_gray <= bin2gray(rptr_bin + 1'b1);
        rbank_q   <= rptr_bin[AW-1 -: BW];
      end
      wgray_r1 <= wptr_gray;
      wgray_r2 <= wgray_r1;
    end
  end

  // ---------------- storage: BANKS dual-port SRAMs ----------------
  logic [W-1:0] bank_rdata [BANKS];

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    dpsram #(.DEPTH(DEPTH / BANKS), .W(W)) u_ram (
      .wclk (wclk),
      .we   (wr_do && wptr_bin[AW-1 -: BW] == BW'(b)),
      .waddr(wptr_bin[BAW-1:0]),
      .wdata(wr_data),
      .rclk (rclk),
      .re   (rd_do && rptr_bin[AW-1 -: BW] == BW'(b)),
      .raddr(rptr_bin[BAW-1:0]),
      .rdata(bank_rdata[b])
    );
  end

  assign rd_data = bank_rdata[rbank_q];

  // A write never lands on a full FIFO, a read never on an empty one.
  assert property (@(posedge wclk) disable iff (!wrst_n) wr_used <= (AW+1)'(DEPTH));
  assert property (@(posedge rclk) disable iff (!rrst_n) rd_used <= (AW+1)'(DEPTH));

endmodule
