// tb_copa_state_counter: self-checking test of the CoPA time-step timer and
// State_Counter. With 7-cycle time-steps it follows the counter over 40
// time-steps and checks, every cycle, against a reference computed from the
// cycle number alone: the time-step index k = cycle / 7, State_Counter = k mod 4,
// QI = its MSB, DC = its LSB, a tick in the last cycle of each time-step, and a
// refresh of queue QI only at the end of time-steps with DC = 1 (once every
// two time-steps).
module tb_copa_state_counter;
  import copa_pkg::*;

  localparam longint unsigned TS = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  logic qi, dc, tick, refresh;
  logic [1:0] state;
  qid_e refresh_q;
  int checks = 0, failures = 0;
  int refreshes = 0;

  copa_state_counter #(.TIMESTEP_CYCLES(TS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .qi_o(qi), .dc_o(dc), .state_o(state),
    .tick_o(tick), .refresh_o(refresh), .refresh_q_o(refresh_q));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned cyc;
    int unsigned k;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (cyc = 0; cyc < 40 * int'(TS); cyc++) begin
      k = cyc / int'(TS);
      check(state == 2'(k % 4), "state_counter value");
      check(qi == state[1] && dc == state[0], "QI/DC are MSB/LSB");
      check(tick == ((cyc % int'(TS)) == int'(TS) - 1), "time-step tick");
      check(refresh == (tick && (k % 2 == 1)), "refresh only after DC=1 step");
      if (refresh) begin
        refreshes++;
        check(refresh_q == qid_e'((k % 4) / 2), "refreshed queue is the Sleepy one");
      end
      @(negedge clk);
    end
    check(refreshes == 20, "one refresh per refresh period");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
