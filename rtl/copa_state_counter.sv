// copa_state_counter: CoPA time-step timer and 2-bit State_Counter.
//
// A free-running timer divides time into time-steps of TIMESTEP_CYCLES clock
// cycles (the alarm clock next to QI/DC in the CoPA overview). The 2-bit
// State_Counter increments by one at the end of every time-step. Its MSB is the
// Queue Identifier (QI): with QI=0 queue Q1 is the Sleepy queue and Q2 the
// Awake queue, with QI=1 the roles are swapped. Its LSB is the Drowsiness
// Categorizer (DC): with DC=0 newly written pages go to the Sleepy queue, with
// DC=1 to the Awake queue. At the end of a time-step in which DC=1 (every second
// time-step, one refresh period = 2 time-steps) the Sleepy queue is refreshed.
// This is the paper's PJA_Refreshing procedure: "if DC = 1, refresh PJA pages
// based on the Sleepy queue; State_Counter = State_Counter + 1", starting at 0.
//
// Timing: tick_o, refresh_o and refresh_q_o are one-cycle pulses in the last
// cycle of a time-step; refresh_q_o carries the QI that was valid during that
// time-step, i.e. the queue to walk. qi_o/dc_o change on the clock edge that
// ends the pulse cycle. The clock frequency behind the default time-step length
// (100 MHz) is this design's choice.
module copa_state_counter
  import copa_pkg::*;
#(
  parameter longint unsigned TIMESTEP_CYCLES = copa_pkg::CFG_TIMESTEP_CYCLES
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  output logic       qi_o,        // Queue Identifier (State_Counter MSB)
  output logic       dc_o,        // Drowsiness Categorizer (State_Counter LSB)
  output logic [1:0] state_o,     // whole State_Counter
  output logic       tick_o,      // last cycle of a time-step
  output logic       refresh_o,   // refresh the Sleepy queue now
  output qid_e       refresh_q_o  // which queue is the Sleepy queue being refreshed
);

  localparam int unsigned CNT_W = (TIMESTEP_CYCLES > 2) ? $clog2(TIMESTEP_CYCLES) : 1;

  logic [CNT_W-1:0] cyc_q;
  logic [1:0]       sc_q;

  assign tick_o      = (cyc_q == CNT_W'(TIMESTEP_CYCLES - 1));
  assign refresh_o   = tick_o && sc_q[0];
  assign refresh_q_o = qid_e'(sc_q[1]);
  assign qi_o        = sc_q[1];
  assign dc_o        = sc_q[0];
  assign state_o     = sc_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cyc_q <= '0;
      sc_q  <= 2'd0;
    end else if (tick_o) begin
      cyc_q <= '0;
      sc_q  <= sc_q + 2'd1;
    end else begin
      cyc_q <= cyc_q + CNT_W'(1);
    end
  end

endmodule
