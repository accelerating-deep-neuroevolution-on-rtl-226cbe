// tb_action_select: argmax over 18 values and sticky actions.
// 1000 random output vectors (some with ties) are streamed in; the selected
// action must be the first index of the maximum, one cycle after the last
// value. Between vectors, frame ticks are given: after each tick the applied
// action must be either the newly selected one or the previously applied
// one, the joystick must match the action table, and over all ticks where
// the two differ the "kept" fraction must be 0.25 +- 0.04.
module tb_action_select;
  import fem_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic q_valid, frame_tick, sel_valid, sticky_hit;
  logic [4:0] q_idx, sel_action, applied;
  act_t q_value;
  joy_t joy;

  action_select dut (.clk, .rst_n, .clear, .q_valid, .q_idx, .q_value, .frame_tick,
                     .sel_action, .sel_valid, .applied_action(applied), .joy, .sticky_hit);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference joystick table, written out per action
  function automatic logic [4:0] joy_ref(int a);  // {up, down, left, right, fire}
    case (a)
      0: return 5'b00000;  1: return 5'b00001;  2: return 5'b10000;  3: return 5'b00010;
      4: return 5'b00100;  5: return 5'b01000;  6: return 5'b10010;  7: return 5'b10100;
      8: return 5'b01010;  9: return 5'b01100; 10: return 5'b10001; 11: return 5'b00011;
     12: return 5'b00101; 13: return 5'b01001; 14: return 5'b10011; 15: return 5'b10101;
     16: return 5'b01011; 17: return 5'b01101;
      default: return 5'b0;
    endcase
  endfunction

  int kept = 0, changed = 0, hits = 0;
  always @(posedge clk) if (rst_n && sticky_hit) hits++;

  initial begin
    shortint v [18];
    int best, prev, ntick, tie;
    q_valid = 0; frame_tick = 0; q_idx = '0; q_value = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 1000; n++) begin
      tie = (n % 5 == 0);
      foreach (v[i]) v[i] = shortint'($urandom_range(4000)) - 2000;
      if (tie) begin v[3] = 3000; v[11] = 3000; end
      best = 0;
      foreach (v[i]) if (v[i] > v[best]) best = i;
      for (int i = 0; i < 18; i++) begin
        q_valid <= 1; q_idx <= 5'(i); q_value <= v[i];
        @(posedge clk);
      end
      #1;
      checks++;
      if (!sel_valid) begin failures++; $display("sel_valid not one cycle after the last value"); end
      q_valid <= 0;
      if (int'(sel_action) != best) begin failures++; $display("vector %0d: chose %0d expected %0d", n, sel_action, best); end
      // 6 frame ticks
      for (int t = 0; t < 6; t++) begin
        prev = applied;
        @(negedge clk) frame_tick = 1;
        @(negedge clk) frame_tick = 0;
        checks += 2;
        if (int'(applied) != best && int'(applied) != prev) begin failures++; $display("applied %0d", applied); end
        if (joy != joy_ref(applied)) begin failures++; $display("joystick for %0d wrong", applied); end
        if (prev != best) begin
          if (int'(applied) == prev) kept++; else changed++;
        end
      end
    end
    checks++;
    $display("kept %0d of %0d differing ticks (%0d sticky_hit)", kept, kept + changed, hits);
    if (real'(kept) / real'(kept + changed) < 0.21 || real'(kept) / real'(kept + changed) > 0.29) begin
      failures++; $display("stickiness off");
    end
    checks++;
    if (hits != kept) begin failures++; $display("sticky_hit count %0d vs %0d", hits, kept); end
    clear <= 1; @(posedge clk); clear <= 0; @(posedge clk);
    checks++;
    if (applied != 0 || sel_action != 0) begin failures++; $display("clear failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
