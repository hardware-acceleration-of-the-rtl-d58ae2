// tb_gipps_ctrl -- self-checking test of the four-cycle sequencer. After each
// accepted start the steps must run C1, C2, C3, C4, then IDLE with a one-cycle
// done; ready must be low for exactly the four computation cycles; starts are
// given back to back (in the done cycle) and after idle gaps.
module tb_gipps_ctrl;
  import gipps_pkg::*;

  logic  clk = 0, rst_n = 0, start = 0;
  logic  ready, load, done;
  step_t step;
  int    checks = 0, failures = 0, cycle = 0;

  gipps_ctrl dut (.clk, .rst_n, .start, .ready, .load, .step, .done);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_state(input step_t st, input logic rdy, input logic dn);
    checks++;
    if (step != st || ready != rdy || done != dn) begin
      failures++;
      $display("FAIL cycle %0d: step %s ready %0b done %0b, want %s %0b %0b",
               cycle, step.name(), ready, done, st.name(), rdy, dn);
    end
  endtask

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    expect_state(ST_IDLE, 1, 0);
    for (int k = 0; k < 20; k++) begin
      start = 1;
      #1 checks++; if (load !== 1'b1) failures++;
      t0 = cycle + 1;   // the edge that samples start
      @(posedge clk); #1 start = 0;
      expect_state(ST_C1, 0, 0);
      @(posedge clk); #1 expect_state(ST_C2, 0, 0);
      @(posedge clk); #1 expect_state(ST_C3, 0, 0);
      @(posedge clk); #1 expect_state(ST_C4, 0, 0);
      @(posedge clk); #1 expect_state(ST_IDLE, 1, 1);
      checks++;
      if (cycle - t0 != 4) begin failures++; $display("FAIL latency %0d", cycle - t0); end
      // odd iterations: idle gap; even: restart in the done cycle
      if (k % 2 == 1) begin
        repeat (1 + k % 3) begin
          @(posedge clk); #1 expect_state(ST_IDLE, 1, 0);
        end
      end
    end
    // reset in the middle of an evaluation returns to idle
    start = 1; @(posedge clk); #1 start = 0;
    @(posedge clk); #1 rst_n = 0; #1;
    expect_state(ST_IDLE, 1, 0);
    rst_n = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
