// tb_spi_slave: an SPI master sends random 16-bit commands in back-to-back
// frames; checks each command word presented at the 16th bit with cmd_stb,
// that cmd_stb is high only then, and that the word on tx_word at the
// start of each frame comes out on MISO, MSB first. Also aborts a frame
// half way and checks the realignment.
module tb_spi_slave;
  logic rst_n = 1, sclk = 0, cs_n = 0, mosi = 0, miso, cmd_stb;
  logic [15:0] cmd_word, tx_word = '0;
  int checks = 0, failures = 0;
  logic [15:0] got_cmd;
  int n_stb = 0;

  spi_slave #(.W(16)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  always @(posedge sclk) if (cmd_stb) begin got_cmd = cmd_word; n_stb++; end

  task automatic frame(input logic [15:0] cmd, input logic [15:0] tx, input int nbits);
    logic [15:0] rx = '0;
    tx_word = tx;
    for (int i = 15; i >= 16 - nbits; i--) begin
      mosi = cmd[i]; #10;
      sclk = 1; #10;
      sclk = 0;
      rx = {rx[14:0], miso}; #1;
      if (i == 15) tx_word = ~tx;             // later changes must not matter
    end
    if (nbits == 16) check(rx == tx, $sformatf("miso %h exp %h", rx, tx));
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 begin rst_n = 0; cs_n = 1; end
    #10 rst_n = 1;
    #10 cs_n = 0;
    for (int k = 0; k < 200; k++) begin
      automatic logic [15:0] c = 16'($urandom), t = 16'($urandom);
      automatic int n_before = n_stb;
      if (k % 25 == 7) begin
        frame(c, t, 5);                    // aborted frame
        cs_n = 1; #20 cs_n = 0; #10;
        check(n_stb == n_before, "no strobe for an aborted frame");
        continue;
      end
      frame(c, t, 16);
      check(n_stb == n_before + 1 && got_cmd == c, $sformatf("cmd %h exp %h", got_cmd, c));
    end
    cs_n = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
