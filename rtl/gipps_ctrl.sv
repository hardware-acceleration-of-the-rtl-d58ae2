// gipps_ctrl -- control unit of the Gipps accelerator.
//
// A five-state sequencer: IDLE, then the four computation cycles C1..C4 of
// one evaluation of equation (1). A start pulse accepted in IDLE moves it to
// C1 on the next clock edge (on that same edge the datapath captures the
// operands); after C4 it returns to IDLE and raises done for one cycle, the
// cycle in which the new result is first visible. So done follows the edge
// that samples start by exactly four clock edges, the paper's "4 clock
// cycles", and a new start may be given in the same cycle as done.
//
// The paper says only that a small control unit exists and that the whole
// computation takes four cycles; the state encoding, the start/ready/done
// handshake and the asynchronous active-low reset are this design's choices.
// Starting while busy is a protocol error and is flagged by an assertion; the
// request is ignored.
module gipps_ctrl
  import gipps_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,   // begin an evaluation (honoured when ready)
  output logic  ready,   // idle, start will be accepted
  output logic  load,    // capture operands this cycle
  output step_t step,    // current computation cycle
  output logic  done     // one-cycle pulse: result register just updated
);

  step_t nxt;

  always_comb begin
    unique case (step)
      ST_IDLE: nxt = start ? ST_C1 : ST_IDLE;
      ST_C1:   nxt = ST_C2;
      ST_C2:   nxt = ST_C3;
      ST_C3:   nxt = ST_C4;
      ST_C4:   nxt = ST_IDLE;
      default: nxt = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step <= ST_IDLE;
      done <= 1'b0;
    end else begin
      step <= nxt;
      done <= (step == ST_C4);
    end
  end

  assign ready = (step == ST_IDLE);
  assign load  = ready && start;

  // Handshake rules.
  a_no_start_busy : assert property (@(posedge clk) disable iff (!rst_n)
    start |-> ready) else $error("gipps_ctrl: start while busy");
  a_done_after_4  : assert property (@(posedge clk) disable iff (!rst_n)
    load |-> ##5 done);  // sampled: done set by the 4th edge after load
  a_done_pulse    : assert property (@(posedge clk) disable iff (!rst_n)
    done |=> !done);

endmodule
