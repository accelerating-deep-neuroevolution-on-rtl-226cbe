// action_select: greedy action choice with sticky actions.
//
// The network's 18 outputs arrive one per cycle (q_valid/q_idx/q_value, in
// action order). The stage keeps a running maximum and, after the last
// output, holds the index of the largest value as the selected action
// (sel_action, announced by sel_valid). Ties keep the lower index.
//
// Sticky actions: at every frame_tick (start of a console frame) the applied
// action is either replaced by the latest selected action or, with
// probability 1/4, kept from the previous frame. The random draw uses the two
// low bits of a free-running 41-bit maximum-length LFSR (Fibonacci form,
// polynomial x^41 + x^38 + 1), which advances every clock independently of
// the rest of the loop; both bits zero means "keep". The applied action drives
// the joystick through the 18-action table of fem_pkg.
//
// From the paper: argmax selection, stickiness 0.25, a maximum-length 41-bit
// LFSR. This design's choices: the polynomial, the use of two LFSR bits, tie
// breaking, and the action-to-joystick table (Arcade Learning Environment
// order). clear returns both actions to NOOP.
//
// Timing: sel_valid one cycle after the last q_valid; the applied action
// changes one cycle after frame_tick. sticky_hit pulses when a tick kept the
// old action although a different one was selected.
module action_select
  import fem_pkg::*;
#(
  parameter int unsigned     N_ACT = fem_pkg::N_ACTIONS,
  parameter logic [40:0]     SEED  = 41'h1_2345_6789
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       q_valid,
  input  logic [4:0] q_idx,
  input  act_t       q_value,
  input  logic       frame_tick,
  output logic [4:0] sel_action,
  output logic       sel_valid,
  output logic [4:0] applied_action,
  output joy_t       joy,
  output logic       sticky_hit
);

  // free-running maximum-length LFSR
  logic [40:0] lfsr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lfsr <= SEED;
    else        lfsr <= {lfsr[39:0], lfsr[40] ^ lfsr[37]};
  end

  logic       keep;
  assign keep = (lfsr[1:0] == 2'b00);

  // running argmax
  act_t       best_val;
  logic [4:0] best_idx;
  logic       better;
  assign better = (q_idx == 5'd0) || (q_value > best_val);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_val <= '0;
      best_idx <= '0;
      sel_action <= '0;
      sel_valid <= 1'b0;
      applied_action <= '0;
      sticky_hit <= 1'b0;
    end else begin
      sel_valid  <= 1'b0;
      sticky_hit <= 1'b0;
      if (clear) begin
        sel_action <= '0;
        applied_action <= '0;
      end else begin
        if (q_valid) begin
          if (better) begin
            best_val <= q_value;
            best_idx <= q_idx;
          end
          if (q_idx == 5'(N_ACT - 1)) begin
            sel_action <= better ? q_idx : best_idx;
            sel_valid  <= 1'b1;
          end
        end
        if (frame_tick) begin
          if (!keep) applied_action <= sel_action;
          sticky_hit <= keep && (applied_action != sel_action);
        end
      end
    end
  end

  assign joy = action_to_joy(applied_action);

endmodule
