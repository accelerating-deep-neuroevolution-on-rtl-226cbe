// fitness_eval_module: one complete fitness evaluation loop.
//
// Plays one game with one set of network weights entirely in hardware:
//
//   console pixels -> color_convert -> frame_pool -> rescale_bilinear
//     -> frame_stack -> ann -> action_select -> console joystick
//
// The console (an Atari 2600 core, not part of this RTL) connects through the
// console_* ports: it reads its cartridge from rom_bram, emits one pixel
// (a palette index) per enabled cycle with a start-of-frame flag, pulses
// console_frame_end after each frame, and offers a read port into its RAM,
// from which game_status takes the score and the game-over flag. loop_ctrl
// runs the console four frames at a time, pauses it while the network
// evaluates the stacked frames, and ends the game when it is over or the host
// stops it. axi_regs gives the host write access to the ROM, weights, game
// identifier, descriptor table and command register and read access to
// status, score, frame and clock counters.
//
// Structure and register list follow the paper (its Fig. 2 and Sec. 3.2);
// the single clock domain, the console pausing and the port protocol of the
// console are this design's choices. Several instances can share one AXI bus
// behind an address decoder (the paper places two per FPGA).
module fitness_eval_module
  import fem_pkg::*;
#(
  parameter int unsigned ADDR_W    = 24,
  parameter int unsigned ROM_BYTES = 32768,
  parameter int unsigned N_GAMES   = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0]            s_axi_awaddr,
  input  logic                         s_axi_awvalid,
  output logic                         s_axi_awready,
  input  logic [31:0]                  s_axi_wdata,
  input  logic [3:0]                   s_axi_wstrb,
  input  logic                         s_axi_wvalid,
  output logic                         s_axi_wready,
  output logic [1:0]                   s_axi_bresp,
  output logic                         s_axi_bvalid,
  input  logic                         s_axi_bready,
  input  logic [ADDR_W-1:0]            s_axi_araddr,
  input  logic                         s_axi_arvalid,
  output logic                         s_axi_arready,
  output logic [31:0]                  s_axi_rdata,
  output logic [1:0]                   s_axi_rresp,
  output logic                         s_axi_rvalid,
  input  logic                         s_axi_rready,
  // Atari 2600 core
  output logic                         console_rst,
  output logic                         console_ce,
  output joy_t                         console_joy,
  input  logic [$clog2(ROM_BYTES)-1:0] console_rom_addr,
  output logic [7:0]                   console_rom_data,
  input  logic                         console_pix_valid,
  input  logic                         console_pix_sof,
  input  logic [6:0]                   console_pix_color,
  input  logic                         console_frame_end,
  output logic [6:0]                   console_ram_raddr,
  input  logic [7:0]                   console_ram_rdata,
  // loop state (also readable over AXI)
  output logic                         running,
  output logic                         game_over
);

  // ---------------- host interface ----------------
  logic                            cmd_reset, cmd_start, cmd_stop;
  logic [$clog2(N_GAMES)-1:0]      game_id;
  logic                            desc_we;
  logic [$clog2(2*N_GAMES)-1:0]    desc_addr;
  logic [31:0]                     desc_wdata;
  logic                            rom_we;
  logic [$clog2(ROM_BYTES/4)-1:0]  rom_waddr;
  logic [31:0]                     rom_wdata;
  logic [3:0]                      rom_wstrb;
  logic                            w_we;
  logic [$clog2(NW_TOTAL)-1:0]     w_idx;
  act_t                            w_data;
  logic                            dead;
  logic [31:0]                     score, frame_count;
  logic [63:0]                     clock_count;
  logic [4:0]                      sel_action;

  axi_regs #(.ADDR_W(ADDR_W), .ROM_BYTES(ROM_BYTES), .N_GAMES(N_GAMES)) u_axi (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb,
    .s_axi_wvalid, .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready, .s_axi_rdata, .s_axi_rresp,
    .s_axi_rvalid, .s_axi_rready,
    .cmd_reset, .cmd_start, .cmd_stop, .game_id,
    .desc_we, .desc_addr, .desc_wdata,
    .rom_we, .rom_waddr, .rom_wdata, .rom_wstrb,
    .w_we, .w_idx, .w_data,
    .st_dead(dead), .st_running(running), .st_score(score), .st_frames(frame_count),
    .st_clocks(clock_count), .st_action(sel_action));

  // ---------------- environment: cartridge ROM ----------------
  rom_bram #(.ROM_BYTES(ROM_BYTES)) u_rom (
    .clk, .we(rom_we), .waddr(rom_waddr), .wdata(rom_wdata), .wstrb(rom_wstrb),
    .raddr(console_rom_addr), .rdata(console_rom_data));

  // ---------------- loop control ----------------
  logic clear, ann_start, frame_tick, stack_ready, sel_valid, stall;

  loop_ctrl u_ctrl (
    .clk, .rst_n, .cmd_reset, .cmd_start, .cmd_stop,
    .frame_end(console_frame_end), .stack_ready, .sel_valid, .dead,
    .clear, .console_rst, .console_ce, .ann_start, .frame_tick,
    .running, .stopped(game_over), .frame_count, .clock_count, .stall);

  // ---------------- image pre-processing ----------------
  pix_color_t pix_c;
  pix_luma_t  pix_y, pix_p, pix_s;
  logic       scaled_done;

  assign pix_c = '{valid: console_pix_valid, sof: console_pix_sof, color: console_pix_color};

  color_convert u_color (.clk, .rst_n, .pix_i(pix_c), .pix_o(pix_y));
  frame_pool u_pool (.clk, .rst_n, .clear, .pix_i(pix_y), .pix_o(pix_p));
  rescale_bilinear u_scale (.clk, .rst_n, .pix_i(pix_p), .pix_o(pix_s), .frame_done(scaled_done));

  logic [$clog2(NET_W*NET_H)-1:0] stk_raddr;
  act_t                           stk_rdata [STACK];

  frame_stack u_stack (.clk, .rst_n, .clear, .pix_i(pix_s), .stack_ready,
                       .rd_addr(stk_raddr), .rd_data(stk_rdata));

  // ---------------- agent: network and action selection ----------------
  logic       q_valid, ann_done, ann_busy;
  logic [4:0] q_idx;
  act_t       q_value;

  ann u_ann (.clk, .rst_n, .start(ann_start), .done(ann_done), .busy(ann_busy),
             .in_raddr(stk_raddr), .in_rdata(stk_rdata),
             .w_we, .w_idx, .w_data, .q_valid, .q_idx, .q_value);

  logic [4:0] applied_action;
  logic       sticky_hit;

  action_select u_act (.clk, .rst_n, .clear, .q_valid, .q_idx, .q_value,
                       .frame_tick, .sel_action, .sel_valid, .applied_action,
                       .joy(console_joy), .sticky_hit);

  // ---------------- game status ----------------
  logic status_updated;

  game_status #(.N_GAMES(N_GAMES)) u_status (
    .clk, .rst_n, .clear, .game_id, .desc_we, .desc_addr, .desc_wdata,
    .sample(console_frame_end), .ram_raddr(console_ram_raddr),
    .ram_rdata(console_ram_rdata), .score, .dead, .updated(status_updated));

endmodule
