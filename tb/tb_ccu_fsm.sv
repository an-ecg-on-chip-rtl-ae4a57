// tb_ccu_fsm: walks FIFO usage through the thresholds of the CCU state
// machine and checks every transition and hold, the interrupt and the
// write lock: Empty->Ready above 25 %, Ready->Critical above 75 %,
// Critical->Ready below 75 %, Critical->Full at 100 %, and soft reset from
// Ready, Critical and Full back to Empty.
module tb_ccu_fsm;
  import ecg_pkg::*;
  logic clk = 0, rst_n = 0, srst = 0;
  logic [9:0] f_use = '0;
  ccu_state_e state;
  logic irq, wr_lock;
  int checks = 0, failures = 0;

  ccu_fsm #(.DEPTH(512)) dut (.*);
  always #5 clk = ~clk;

  task automatic step(input int use_v, input bit sr, input ccu_state_e exp);
    f_use = 10'(use_v); srst = sr;       // called at a falling edge
    @(negedge clk);
    checks++;
    if (state != exp || irq != (exp != ST_EMPTY) || wr_lock != (exp == ST_FULL)) begin
      failures++;
      $display("FAIL use=%0d srst=%0b state %s exp %s", use_v, sr, state.name(), exp.name());
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    step(0,   0, ST_EMPTY);
    step(100, 0, ST_EMPTY);
    step(128, 0, ST_EMPTY);
    step(128, 1, ST_EMPTY);
    step(129, 0, ST_READY);
    step(10,  0, ST_READY);
    step(384, 0, ST_READY);
    step(385, 0, ST_CRITICAL);
    step(384, 0, ST_CRITICAL);
    step(383, 0, ST_READY);
    step(400, 0, ST_CRITICAL);
    step(511, 0, ST_CRITICAL);
    step(512, 0, ST_FULL);
    step(0,   0, ST_FULL);
    step(512, 0, ST_FULL);
    step(512, 1, ST_EMPTY);
    step(512, 0, ST_READY);
    step(300, 1, ST_EMPTY);
    step(200, 0, ST_READY);
    step(500, 0, ST_CRITICAL);
    step(500, 1, ST_EMPTY);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
