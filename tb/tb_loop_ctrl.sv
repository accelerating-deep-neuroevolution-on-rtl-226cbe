// tb_loop_ctrl: the loop's state sequence against a scripted environment.
// A simple environment answers the controller: a console that produces a
// registered frame_end pulse after every 50 enabled cycles, a frame stack that reports ready 3
// cycles after every 4th frame, a network that answers 200 cycles after
// ann_start. Checks: console held in reset until start; exactly 4 frames per
// network run; the console never advances while paused; frame_tick once per
// frame; frame and clock counters; stop and dead both end the loop; reset
// clears the counters and restarts.
module tb_loop_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_reset = 0, cmd_start = 0, cmd_stop = 0, frame_end, stack_ready, sel_valid, dead;
  logic clear, console_rst, console_ce, ann_start, frame_tick, running, stopped, stall;
  logic [31:0] frame_count;
  logic [63:0] clock_count;

  loop_ctrl dut (.clk, .rst_n, .cmd_reset, .cmd_start, .cmd_stop, .frame_end, .stack_ready,
                 .sel_valid, .dead, .clear, .console_rst, .console_ce, .ann_start, .frame_tick,
                 .running, .stopped, .frame_count, .clock_count, .stall);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // environment
  int ce_cnt = 0, frames = 0, frames_since_ann = 0, ann_runs = 0, ticks = 0, bad_group = 0;
  int stack_timer = -1, ann_timer = -1, ce_while_stall = 0;
  always_ff @(posedge clk) begin
    if (!rst_n || console_rst) begin ce_cnt <= 0; frame_end <= 0; end
    else begin
      frame_end <= console_ce && (ce_cnt == 49);
      if (console_ce) ce_cnt <= (ce_cnt == 49) ? 0 : ce_cnt + 1;
    end
  end
  assign dead = 1'b0 || dead_force;
  logic dead_force = 0;
  always @(posedge clk) if (rst_n) begin
    if (frame_end) begin frames++; frames_since_ann++; end
    if (frame_end && frames_since_ann % 4 == 0) stack_timer = 3;
    else if (stack_timer > 0) stack_timer--;
    if (ann_start) begin
      if (frames_since_ann != 4) bad_group++;
      frames_since_ann = 0; ann_runs++; ann_timer = 200;
    end else if (ann_timer > 0) ann_timer--;
    if (frame_tick) ticks++;
    if (stall && console_ce) ce_while_stall++;
  end
  assign stack_ready = (stack_timer == 1);
  assign sel_valid = (ann_timer == 1);

  task automatic pulse(ref logic s);
    s = 1; @(posedge clk); #1 s = 0;
  endtask

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk); #1;
    expect_eq("console reset while idle", console_rst, 1);
    expect_eq("console idle", console_ce, 0);
    pulse(cmd_start);
    // run 5 network rounds
    while (ann_runs < 5) @(posedge clk);
    while (!sel_valid) @(posedge clk);
    repeat (10) @(posedge clk); #1;
    expect_eq("groups of 4 frames", bad_group, 0);
    expect_eq("console stalled during network", ce_while_stall, 0);
    expect_eq("frame counter", frame_count, frames);
    expect_eq("ticks = frames + 1 (one pending)", ticks, frames + 1);
    expect_eq("running", running, 1);
    t0 = int'(clock_count);
    repeat (100) @(posedge clk); #1;
    expect_eq("clock counter", clock_count - t0, 100);
    pulse(cmd_stop);
    @(posedge clk); #1;
    expect_eq("stop ends loop", stopped, 1);
    expect_eq("console paused after stop", console_ce, 0);
    // reset and a second game ending by death
    pulse(cmd_reset);
    #1;
    expect_eq("counters cleared", frame_count + clock_count, 0);
    expect_eq("idle after reset", console_rst, 1);
    pulse(cmd_start);
    repeat (300) @(posedge clk);
    dead_force = 1;
    @(posedge clk); @(posedge clk); #1;
    expect_eq("dead ends loop", stopped, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
