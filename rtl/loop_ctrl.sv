// loop_ctrl: sequencer of the console -> pre-processing -> network loop.
//
// After a start command the console runs (console_ce high) for four frames
// under the current action. The console is then paused until the frame stack
// reports that the fourth pre-processed frame is stored, the network is
// started, and when the action selection has a new action the console resumes
// for the next four frames. At every start of a console frame frame_tick
// lets the action selection apply (or, sticky, keep) the action. The loop
// ends when the game reports dead or a stop command arrives; a reset command
// clears the whole loop (clear pulse, console held in reset) so a new game
// or new weights can be run.
//
// From the paper: the command register (reset, start, forced stop), the frame
// and clock counters, one action per four frames. Pausing the console while
// the network computes, and the state machine itself, are this design's.
//
//   IDLE --start--> RUN --4th frame end--> WAIT_STACK --stack full--> INFER
//   INFER --new action--> RUN;  RUN/WAIT_STACK/INFER --dead or stop--> DONE
//   any --reset--> IDLE
//
// Timing: console_ce drops in the same cycle as the fourth frame_end, so the
// console never begins a fifth frame. clock_count counts cycles in RUN,
// WAIT_STACK and INFER; frame_count counts console frames since the start.
module loop_ctrl
  import fem_pkg::*;
#(
  parameter int unsigned FRAMES_PER_ACTION = fem_pkg::STACK
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_reset,
  input  logic        cmd_start,
  input  logic        cmd_stop,
  input  logic        frame_end,     // console finished a frame
  input  logic        stack_ready,   // frame stack holds a full group
  input  logic        sel_valid,     // action selection has a new action
  input  logic        dead,
  output logic        clear,
  output logic        console_rst,
  output logic        console_ce,
  output logic        ann_start,
  output logic        frame_tick,
  output logic        running,
  output logic        stopped,
  output logic [31:0] frame_count,
  output logic [63:0] clock_count,
  output logic        stall          // console paused for the network
);

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_WAIT_STACK, S_INFER, S_DONE} state_e;
  state_e state;

  localparam int unsigned GW = $clog2(FRAMES_PER_ACTION + 1);
  logic [GW-1:0] grp;
  logic          stack_full;
  logic          last_frame;

  assign last_frame  = frame_end && (grp == GW'(FRAMES_PER_ACTION - 1));
  assign console_ce  = (state == S_RUN) && !last_frame;
  assign console_rst = (state == S_IDLE);
  assign running     = (state == S_RUN) || (state == S_WAIT_STACK) || (state == S_INFER);
  assign stopped     = (state == S_DONE);
  assign stall       = (state == S_WAIT_STACK) || (state == S_INFER);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      grp <= '0;
      stack_full <= 1'b0;
      clear <= 1'b0;
      ann_start <= 1'b0;
      frame_tick <= 1'b0;
      frame_count <= '0;
      clock_count <= '0;
    end else begin
      clear <= 1'b0;
      ann_start <= 1'b0;
      frame_tick <= 1'b0;
      if (running) clock_count <= clock_count + 1'b1;
      if (stack_ready) stack_full <= 1'b1;
      if (cmd_reset) begin
        state <= S_IDLE;
        clear <= 1'b1;
        grp <= '0;
        stack_full <= 1'b0;
        frame_count <= '0;
        clock_count <= '0;
      end else begin
        case (state)
          S_IDLE: if (cmd_start) begin
            state <= S_RUN;
            grp <= '0;
            frame_tick <= 1'b1;
          end
          S_RUN: begin
            if (frame_end) begin
              frame_count <= frame_count + 1'b1;
              if (last_frame) begin
                grp <= '0;
                state <= S_WAIT_STACK;
              end else begin
                grp <= grp + 1'b1;
                frame_tick <= 1'b1;
              end
            end
            if (cmd_stop || dead) state <= S_DONE;
          end
          S_WAIT_STACK: begin
            if (stack_full || stack_ready) begin
              stack_full <= 1'b0;
              ann_start <= 1'b1;
              state <= S_INFER;
            end
            if (cmd_stop || dead) state <= S_DONE;
          end
          S_INFER: begin
            if (sel_valid) begin
              state <= S_RUN;
              frame_tick <= 1'b1;
            end
            if (cmd_stop || dead) state <= S_DONE;
          end
          default: ;
        endcase
      end
    end
  end

endmodule
