// tb_async_fifo: writer and reader on unrelated clocks (period 10 and 37).
// A scoreboard checks every word read, in order. Phases: fill until full
// (writes beyond full must be dropped), drain until empty (reads beyond
// empty must be ignored), then random traffic. Checks the status flags
// against the counts each side reports, and that used counts never exceed
// the depth of 512 words.
module tb_async_fifo;
  localparam int DEPTH = 512;
  logic wclk = 0, rclk = 0, wrst_n = 1, rrst_n = 1;
  logic wr_en = 0, rd_en = 0;
  logic [15:0] wr_data = '0, rd_data;
  logic wr_full, wr_nearly_full, rd_empty, rd_nearly_empty;
  logic [9:0] wr_used, rd_used;
  int checks = 0, failures = 0;
  logic [15:0] q [$];
  int n_full = 0, n_empty = 0, n_drop = 0;

  async_fifo #(.DEPTH(DEPTH), .W(16)) dut (.*);
  always #5 wclk = ~wclk;
  always #18.5 rclk = ~rclk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer
  bit wmode_fill = 1;
  int wprob = 0;
  always @(negedge wclk) if (wrst_n) begin
    check(wr_full == (wr_used == 10'(DEPTH)) && wr_nearly_full == (wr_used > 10'(384)), "write flags");
    check(wr_used <= 10'(DEPTH), "write used bound");
    if (wr_full) n_full++;
    // wr_full cannot change before the next rising edge, which takes wr_en
    wr_en   = ($urandom_range(0, 99) < wprob);
    wr_data = 16'($urandom);
    if (wr_en && !wr_full) q.push_back(wr_data);
    if (wr_en && wr_full) n_drop++;
  end

  // reader: rd_data is valid after the edge that accepted rd_en
  int rprob = 0;
  bit pend = 0;
  always @(negedge rclk) if (rrst_n) begin
    if (pend) begin
      automatic logic [15:0] e = q.pop_front();
      check(rd_data == e, $sformatf("read %h exp %h", rd_data, e));
    end
    check(rd_empty == (rd_used == 0) && rd_nearly_empty == (rd_used < 10'(128)), "read flags");
    check(rd_used <= 10'(DEPTH), "read used bound");
    if (rd_empty) n_empty++;
    rd_en = ($urandom_range(0, 99) < rprob);
    pend  = rd_en && !rd_empty;
  end

  initial begin
    #1 begin wrst_n = 0; rrst_n = 0; end
    #100 begin wrst_n = 1; rrst_n = 1; end
    wprob = 100; rprob = 0;
    #20000;
    check(q.size() == DEPTH && wr_full, $sformatf("filled to %0d", q.size()));
    check(n_drop > 0, "writes past full were offered and dropped");
    wprob = 0; rprob = 100;
    #40000;
    check(q.size() == 0 && rd_empty, "drained");
    wprob = 40; rprob = 90;
    #400000;
    wprob = 90; rprob = 20;
    #200000;
    wprob = 0; rprob = 100;
    #100000;
    check(q.size() == 0, "all words read back");
    check(n_full > 0 && n_empty > 0, "full and empty seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
