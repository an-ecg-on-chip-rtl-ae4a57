// tb_dpsram: writes random words on one clock, reads them back on another,
// and checks the read port holds its word when re is low.
module tb_dpsram;
  logic wclk = 0, rclk = 0, we = 0, re = 0;
  logic [7:0] waddr = '0, raddr = '0;
  logic [15:0] wdata = '0, rdata;
  logic [15:0] model [256];
  int checks = 0, failures = 0;

  dpsram #(.DEPTH(256), .W(16)) dut (.*);
  always #5 wclk = ~wclk;
  always #7 rclk = ~rclk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge wclk) begin we = 1; waddr = 8'(i); wdata = 16'($urandom); model[i] = wdata; end
    end
    @(negedge wclk) we = 0;
    for (int k = 0; k < 600; k++) begin
      automatic int a = (k < 256) ? 255 - k : $urandom_range(0, 255);
      @(negedge rclk) begin re = 1; raddr = 8'(a); end
      @(negedge rclk) begin re = 0; raddr = 8'(a + 1); end
      checks++;
      if (rdata != model[a]) begin failures++; $display("FAIL addr %0d %h exp %h", a, rdata, model[a]); end
      @(negedge rclk);
      checks++;
      if (rdata != model[a]) begin failures++; $display("FAIL hold %0d", a); end
      if (k % 5 == 0) begin       // overwrite one word
        @(negedge wclk) begin we = 1; waddr = 8'(a); wdata = 16'($urandom); model[a] = wdata; end
        @(negedge wclk) we = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
