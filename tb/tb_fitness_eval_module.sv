// tb_fitness_eval_module: end-to-end test of the fitness evaluation loop at
// full size (every parameter of the top at its default).
//
// A behavioural console (atari2600_model) is attached to the console ports.
// Over AXI the testbench loads a random cartridge ROM, random network weights
// and a descriptor for game 5 (BCD score at RAM 0x10/0x11, dead when RAM
// 0x20 == 0), then plays one game to its end. It then restarts the loop with
// the reset command and plays a second game, with game-over detection off,
// rewriting the last layer after every decision so that a different action
// wins each time (which makes sticky actions visible), and ends it with the
// stop command.
//
// Checked independently of the RTL:
//  * pre-processing: for every group the four stacked 84x84 frames are
//    recomputed from the captured console pixels (palette -> BT.601 luminance
//    in floating point, maximum with the previous console frame, bilinear
//    re-sampling) and compared with the stack buffer within 2 grey levels;
//  * network and action: the 18 outputs are recomputed with the integer
//    reference from the stacked input actually presented to the network, and
//    the selected action must be their argmax;
//  * sticky actions: the joystick always shows the applied action, which is
//    either the newest selected action or the one applied before;
//  * the console never runs while the loop is stalled for the network, and
//    never runs more than four frames per decision;
//  * the host registers: score equals the console's BCD score, frame count
//    equals the frames played, clock count equals the cycles spent, and the
//    status bits after game over, reset and stop.
//  * the loop rate, frames x 150 MHz / clock count, is at least the 1,450
//    frames per second of the reference design.
// Each mechanism (stall, sticky draw, sticky hit, pooling taking the previous
// frame, network run, game over, stop, reset) is counted and one that never
// happened counts as a failure.
module tb_fitness_eval_module;
  import fem_pkg::*;
  import tb_ref_pkg::*;

  localparam int NPIX = FRAME_W * FRAME_H;
  localparam int NOUT = NET_W * NET_H;
  localparam int GAME = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [23:0] awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        console_rst, console_ce, pix_valid, pix_sof, frame_end, running, game_over;
  joy_t        joy;
  logic [14:0] rom_addr;
  logic [7:0]  rom_data, ram_rdata;
  logic [6:0]  pix_color, ram_raddr;

  fitness_eval_module dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .console_rst, .console_ce, .console_joy(joy), .console_rom_addr(rom_addr),
    .console_rom_data(rom_data), .console_pix_valid(pix_valid), .console_pix_sof(pix_sof),
    .console_pix_color(pix_color), .console_frame_end(frame_end),
    .console_ram_raddr(ram_raddr), .console_ram_rdata(ram_rdata),
    .running, .game_over);

  atari2600_model cons (
    .clk, .rst(console_rst), .ce(console_ce), .joy, .rom_addr, .rom_data,
    .pix_valid, .pix_sof, .pix_color, .frame_end, .ram_raddr, .ram_rdata);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: %0d expected %0d", what, got, exp); end
  endtask

  // ---------------- AXI master ----------------
  task automatic axi_write(logic [23:0] a, logic [31:0] d);
    awaddr <= a; awvalid <= 1; wdata <= d; wstrb <= 4'hf; wvalid <= 1; bready <= 0;
    @(posedge clk);
    while (!(awready && wready)) @(posedge clk);
    awvalid <= 0; wvalid <= 0; bready <= 1;
    @(posedge clk);
    while (!bvalid) @(posedge clk);
    bready <= 0;
  endtask

  task automatic axi_read(logic [23:0] a, output logic [31:0] d);
    araddr <= a; arvalid <= 1; rready <= 0;
    @(posedge clk);
    while (!arready) @(posedge clk);
    arvalid <= 0; rready <= 1;
    @(posedge clk);
    while (!rvalid) @(posedge clk);
    d = rdata;
    rready <= 0;
  endtask

  // ---------------- reference data ----------------
  logic [23:0] pal [128];
  byte unsigned lum_of [128];
  shortint w1[], w2[], w3[], w4[];

  // captured console frames (luminance), ring of 5
  byte unsigned fr [5][NPIX];
  int nframes = 0, pidx = 0;
  int run_frames = 0;       // frames captured since the loop was last started

  // mechanism counters
  int n_stall = 0, n_sticky_draw = 0, n_sticky_hit = 0, n_pool_prev = 0, n_ann = 0;
  int n_dead = 0, n_stop = 0, n_reset = 0, n_groups = 0;

  always @(posedge clk) if (rst_n) begin
    if (pix_valid) begin
      if (pix_sof) pidx = 0;
      fr[nframes % 5][pidx] = lum_of[pix_color];
      pidx++;
      if (pidx == NPIX) begin nframes++; run_frames++; pidx = 0; end
    end
  end

  // console must stand still while the loop waits for the network
  int n_ce_in_stall = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.stall) n_stall++;
    if (dut.stall && console_ce) n_ce_in_stall++;
    if (dut.frame_tick && dut.u_act.keep) n_sticky_draw++;
    if (dut.sticky_hit) n_sticky_hit++;
    if (dut.ann_done) n_ann++;
  end

  // frames played per decision
  int frames_since_sel = 0, max_frames_per_sel = 0;
  always @(posedge clk) if (rst_n) begin
    if (console_rst || dut.sel_valid) frames_since_sel = 0;
    else if (frame_end) frames_since_sel++;
    if (frames_since_sel > max_frames_per_sel) max_frames_per_sel = frames_since_sel;
  end

  // expected action from the integer network model on the actual stack
  int exp_action = -1;
  logic [4:0] last_sel = 0, prev_applied = 0;

  task automatic check_group();
    byte unsigned pooled [];
    shortint x0[], x1[], x2[], x3[], y[];
    int first, bad, best;
    n_groups++;
    first = nframes - 4;
    bad = 0;
    pooled = new[NPIX];
    for (int k = 0; k < 4; k++) begin
      int f = first + k;
      bit has_prev = (run_frames - 4 + k) > 0;
      for (int i = 0; i < NPIX; i++) begin
        byte unsigned cur = fr[f % 5][i];
        if (has_prev && fr[(f + 4) % 5][i] > cur) begin
          pooled[i] = fr[(f + 4) % 5][i];
          n_pool_prev++;
        end else pooled[i] = cur;
      end
      for (int oy = 0; oy < NET_H; oy++)
        for (int ox = 0; ox < NET_W; ox++) begin
          real r;
          int e, g;
          r = ref_bilinear(pooled, FRAME_W, FRAME_H, NET_W, NET_H, ox, oy);
          e = int'($floor(r + 0.5));
          g = int'(dut.u_stack.mem[oy * NET_W + ox][k]);
          checks++;
          if (g - e > 2 || e - g > 2) begin
            failures++;
            if (bad++ < 5) $display("group %0d frame %0d pixel (%0d,%0d): %0d expected %0d",
                                    n_groups, k, ox, oy, g, e);
          end
        end
    end
    x0 = new[NOUT * STACK];
    for (int i = 0; i < NOUT; i++)
      for (int c = 0; c < STACK; c++)
        x0[i * STACK + c] = shortint'(dut.u_stack.mem[i][c] >> 2);
    ref_conv(x0, w1, x1, 84, 84, 4, 8, 4, 32, 1'b1);
    ref_conv(x1, w2, x2, 20, 20, 32, 4, 2, 64, 1'b1);
    ref_conv(x2, w3, x3, 9, 9, 64, 3, 1, 64, 1'b1);
    ref_conv(x3, w4, y, 7, 7, 64, 7, 1, 18, 1'b0);
    best = 0;
    for (int a = 1; a < N_ACTIONS; a++) if (y[a] > y[best]) best = a;
    exp_action = best;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (dut.stack_ready) check_group();
    if (dut.sel_valid) begin
      expect_eq("selected action", dut.sel_action, exp_action);
      $display("group %0d: action %0d", n_groups, dut.sel_action);
      last_sel = dut.sel_action;
    end
    if (console_rst) begin last_sel = 0; prev_applied = 0; end
  end

  // joystick: applied action is the new selection or the previous one
  always @(posedge clk) if (rst_n && pix_valid && pix_sof) begin
    logic [4:0] ap;
    ap = dut.applied_action;
    checks++;
    if (ap != last_sel && ap != prev_applied) begin
      failures++;
      $display("applied action %0d is neither the selected %0d nor the previous %0d",
               ap, last_sel, prev_applied);
    end
    checks++;
    if (joy != action_to_joy(ap)) begin failures++; $display("joystick does not match action"); end
    prev_applied = ap;
  end

  // ---------------- weights ----------------
  localparam int G2_GROUPS = 12;
  int favoured = -1;
  shortint w4_orig [];

  // make output t dominant in the last layer (weight 0.5 on every input),
  // restoring the previously favoured output's random weights
  task automatic favour_action(int t);
    for (int pass = 0; pass < 2; pass++) begin
      int o;
      o = pass == 0 ? favoured : t;
      if (o >= 0)
        for (int ky = 0; ky < 7; ky++) for (int kx = 0; kx < 7; kx++)
          for (int i = 0; i < 64; i++) begin
            int n;
            n = ((o * 7 + ky) * 7 + kx) * 64 + i;
            w4[n] = pass == 0 ? w4_orig[n] : shortint'(4096);
            axi_write(WEIGHT_BASE + 24'(4 * (WBASE_L4 + wt_index(o, ky, kx, i, 7, 64, 4, 1))),
                      {{16{w4[n][15]}}, w4[n]});
          end
    end
    favoured = t;
  endtask

  task automatic load_layer(ref shortint w[], input int base, input int oc, input int k,
                            input int ic, input int cpf, input int kpf);
    for (int o = 0; o < oc; o++) for (int ky = 0; ky < k; ky++)
      for (int kx = 0; kx < k; kx++) for (int i = 0; i < ic; i++) begin
        int n;
        n = ((o * k + ky) * k + kx) * ic + i;
        axi_write(WEIGHT_BASE + 24'(4 * (base + wt_index(o, ky, kx, i, k, ic, cpf, kpf))),
                  {{16{w[n][15]}}, w[n]});
      end
  endtask

  initial begin
    logic [31:0] d, d2;
    int t_start, bcd;
    real fps;
    awaddr = '0; araddr = '0; awvalid = 0; wvalid = 0; wdata = '0; wstrb = '0;
    bready = 0; arvalid = 0; rready = 0;
    $readmemh("rtl/ntsc_palette.hex", pal);
    foreach (pal[i]) lum_of[i] = byte'(ref_luma(pal[i][23:16], pal[i][15:8], pal[i][7:0]));
    w1 = new[NW_L1]; w2 = new[NW_L2]; w3 = new[NW_L3]; w4 = new[NW_L4];
    foreach (w1[i]) w1[i] = shortint'($signed($urandom_range(1600)) - 800);
    foreach (w2[i]) w2[i] = shortint'($signed($urandom_range(1600)) - 780);
    foreach (w3[i]) w3[i] = shortint'($signed($urandom_range(1600)) - 780);
    foreach (w4[i]) w4[i] = shortint'($signed($urandom_range(160)) - 80);
    w4_orig = w4;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // cartridge, descriptor, game id, weights
    for (int i = 0; i < 32768 / 4; i++) axi_write(ROM_BASE + 24'(4 * i), $urandom);
    axi_write(DESC_BASE + 24'(8 * GAME), {7'b0, 1'b1, 8'h00, 1'b1, 7'h11, 1'b1, 7'h10});
    axi_write(DESC_BASE + 24'(8 * GAME + 4), {7'b0, 1'b1, 8'h00, 8'hff, 1'b0, 7'h20});
    axi_write(REG_GAME_ID, GAME);
    load_layer(w1, 0, 32, 8, 4, 4, 32);
    load_layer(w2, WBASE_L2, 64, 4, 32, 32, 4);
    load_layer(w3, WBASE_L3, 64, 3, 64, 4, 32);
    load_layer(w4, WBASE_L4, 18, 7, 64, 4, 1);
    $display("loaded at cycle %0d", cyc);

    // ---- game 1: play until the game is over ----
    axi_write(REG_CMD, CMD_RESET);
    run_frames = 0;
    t_start = cyc;
    axi_write(REG_CMD, CMD_START);
    while (!game_over) @(posedge clk);
    n_dead++;
    repeat (4) @(posedge clk);
    $display("game over at cycle %0d after %0d frames, %0d groups", cyc, run_frames, n_groups);
    axi_read(REG_STATUS, d);
    expect_eq("status after game over", d[2:0], 3'b010);
    axi_read(REG_SCORE, d);
    bcd = 100 * (10 * cons.ram[8'h11][7:4] + cons.ram[8'h11][3:0])
        + 10 * cons.ram[8'h10][7:4] + cons.ram[8'h10][3:0];
    expect_eq("score", d, bcd);
    $display("score %0d", d);
    axi_read(REG_FRAMES, d);
    expect_eq("frame count", d, cons.frame);
    expect_eq("frames captured", run_frames, cons.frame);
    axi_read(REG_CLOCKS_LO, d);
    axi_read(REG_CLOCKS_HI, d2);
    expect_eq("clock count", {d2, d}, dut.clock_count);
    checks++;
    if (dut.clock_count < 64'(cons.frame * 228 * 262)) begin
      failures++; $display("clock count %0d below console time", dut.clock_count);
    end
    // loop rate: the console model's frame is as long as a real NTSC frame
    // (228 x 262 colour clocks); at a 150 MHz clock the loop must reach the
    // 1,450 frames per second reported for the reference design
    fps = real'(cons.frame) * 150.0e6 / real'(dut.clock_count);
    $display("loop rate at 150 MHz: %0.0f frames/s", fps);
    checks++;
    if (fps < 1450.0) begin failures++; $display("loop rate below 1,450 frames/s"); end
    axi_read(REG_ACTION, d);
    expect_eq("action register", d, last_sel);

    // ---- reset, second game, stopped by the host ----
    axi_write(REG_CMD, CMD_RESET);
    repeat (2) @(posedge clk);
    n_reset++;
    axi_read(REG_STATUS, d);
    expect_eq("status after reset", d[2:0], 3'b001);
    expect_eq("console held in reset", console_rst, 1);
    // game-over detection off: this game is ended by the host
    axi_write(DESC_BASE + 24'(8 * GAME + 4), {7'b0, 1'b0, 8'h00, 8'hff, 1'b0, 7'h20});
    run_frames = 0;
    axi_write(REG_CMD, CMD_START);
    // a new policy after every decision, so that the action keeps changing
    // and sticky actions become visible
    for (int g = 0; g < G2_GROUPS; g++) begin
      while (!dut.sel_valid) @(posedge clk);
      @(posedge clk);
      favour_action((g * 7 + 3) % N_ACTIONS);
    end
    while (!dut.sel_valid) @(posedge clk);
    while (run_frames % 4 != 2) @(posedge clk);
    axi_write(REG_CMD, CMD_STOP);
    repeat (2) @(posedge clk);
    n_stop++;
    axi_read(REG_STATUS, d);
    expect_eq("status after stop", d[2:0], 3'b001);
    expect_eq("stopped", game_over, 1);
    axi_read(REG_FRAMES, d);
    expect_eq("frames of stopped game", d, cons.frame);

    // ---- mechanisms ----
    expect_eq("console enabled during stall", n_ce_in_stall, 0);
    checks++;
    if (max_frames_per_sel > 4) begin failures++; $display("%0d frames per decision", max_frames_per_sel); end
    $display("stall cycles %0d, sticky draws %0d, sticky hits %0d, pooled-from-previous pixels %0d",
             n_stall, n_sticky_draw, n_sticky_hit, n_pool_prev);
    $display("network runs %0d, groups %0d, game over %0d, stop %0d, reset %0d",
             n_ann, n_groups, n_dead, n_stop, n_reset);
    checks += 8;
    if (n_stall == 0)       begin failures++; $display("no stall"); end
    if (n_sticky_draw == 0) begin failures++; $display("no sticky draw"); end
    if (n_sticky_hit == 0)  begin failures++; $display("no sticky hit"); end
    if (n_pool_prev == 0)   begin failures++; $display("pooling never took the previous frame"); end
    if (n_ann == 0)         begin failures++; $display("network never ran"); end
    if (n_dead == 0)        begin failures++; $display("no game over"); end
    if (n_stop == 0)        begin failures++; $display("no stop"); end
    if (n_reset == 0)       begin failures++; $display("no reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
