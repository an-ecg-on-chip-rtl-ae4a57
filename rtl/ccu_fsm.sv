// ccu_fsm: the CCU state machine that watches FIFO usage.
//
// States and transitions follow the chip's CCU state-machine figure, with
// f_use the FIFO usage as a fraction of its depth:
//   Empty    : reset state; stays while f_use <= 25 %; to Ready when f_use > 25 %
//   Ready    : stays while f_use <= 75 %; to Critical when f_use > 75 %
//   Critical : stays from 75 % to 99 %; back to Ready when f_use < 75 %;
//              to Full when f_use = 100 %
//   Full     : stays until soft reset
//   Soft reset (srst) returns Ready, Critical and Full to Empty.
// Ready, Critical and Full raise the CPU interrupt; Full also locks write
// operations into the FIFO. The figure's "lock read pointers when
// f_use = 0" is done by the FIFO itself, which ignores reads when empty.
// Which of the two limits is inclusive at exactly 25 % and 75 % is not
// printed; here both transitions need usage strictly beyond the limit.
//
// Timing: one registered state; outputs decode the state.
module ccu_fsm
  import ecg_pkg::*;
#(
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [AW:0] f_use,
  input  logic       srst,
  output ccu_state_e state,
  output logic       irq,
  output logic       wr_lock
);

  localparam logic [AW:0] Q1 = (AW+1)'(DEPTH / 4);
  localparam logic [AW:0] Q3 = (AW+1)'(DEPTH * 3 / 4);
  localparam logic [AW:0] QF = (AW+1)'(DEPTH);

  ccu_state_e next;

  always_comb begin
    next = state;
    unique case (state)
      ST_EMPTY:    if (f_use > Q1) next = ST_READY;
      ST_READY:    if (srst) next = ST_EMPTY;
                   else if (f_use > Q3) next = ST_CRITICAL;
      ST_CRITICAL: if (srst) next = ST_EMPTY;
                   else if (f_use == QF) next = ST_FULL;
                   else if (f_use < Q3) next = ST_READY;
      ST_FULL:     if (srst) next = ST_EMPTY;
      default:     next = ST_EMPTY;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= ST_EMPTY;
    else        state <= next;
  end

  assign irq     = (state != ST_EMPTY);
  assign wr_lock = (state == ST_FULL);

endmodule
