// axi_regs: AXI4-Lite slave of the fitness evaluation module.
//
// The host controls the loop only through memory-mapped accesses; it never
// stalls the loop. Write accesses are decoded into one-cycle write strobes
// for the game ROM, the network weights and the game descriptor table, into
// the game identifier register and into command pulses; read accesses return
// the status, score, frame counter and clock counter sampled from the loop.
//
//   0x000000 CMD       W  bit0 reset loop, bit1 start, bit2 stop
//   0x000004 GAME_ID   RW game identifier (selects a descriptor)
//   0x000008 STATUS    R  bit0 alive, bit1 dead, bit2 running
//   0x00000C SCORE     R
//   0x000010 FRAMES    R  console frames since start
//   0x000014 CLOCKS_LO R  clock cycles since start, low word
//   0x000018 CLOCKS_HI R  high word
//   0x00001C ACTION    R  last action chosen by the network
//   0x001000 DESC      W  game descriptor table, 2 words per game
//   0x010000 ROM       W  32 KB game ROM, byte strobes honoured
//   0x100000 WEIGHTS   W  one 16-bit weight (wdata[15:0]) per 32-bit word
//
// The list of registers is the paper's; addresses, the AXI4-Lite variant and
// the descriptor table are this design's. A write needs AW and W together;
// one access of each kind is outstanding at a time. Responses are always OKAY.
module axi_regs
  import fem_pkg::*;
#(
  parameter int unsigned ADDR_W    = 24,
  parameter int unsigned ROM_BYTES = 32768,
  parameter int unsigned N_GAMES   = 64
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0]              s_axi_awaddr,
  input  logic                           s_axi_awvalid,
  output logic                           s_axi_awready,
  input  logic [31:0]                    s_axi_wdata,
  input  logic [3:0]                     s_axi_wstrb,
  input  logic                           s_axi_wvalid,
  output logic                           s_axi_wready,
  output logic [1:0]                     s_axi_bresp,
  output logic                           s_axi_bvalid,
  input  logic                           s_axi_bready,
  input  logic [ADDR_W-1:0]              s_axi_araddr,
  input  logic                           s_axi_arvalid,
  output logic                           s_axi_arready,
  output logic [31:0]                    s_axi_rdata,
  output logic [1:0]                     s_axi_rresp,
  output logic                           s_axi_rvalid,
  input  logic                           s_axi_rready,
  // decoded writes
  output logic                           cmd_reset,
  output logic                           cmd_start,
  output logic                           cmd_stop,
  output logic [$clog2(N_GAMES)-1:0]     game_id,
  output logic                           desc_we,
  output logic [$clog2(2*N_GAMES)-1:0]   desc_addr,
  output logic [31:0]                    desc_wdata,
  output logic                           rom_we,
  output logic [$clog2(ROM_BYTES/4)-1:0] rom_waddr,
  output logic [31:0]                    rom_wdata,
  output logic [3:0]                     rom_wstrb,
  output logic                           w_we,
  output logic [$clog2(NW_TOTAL)-1:0]    w_idx,
  output act_t                           w_data,
  // values to read
  input  logic                           st_dead,
  input  logic                           st_running,
  input  logic [31:0]                    st_score,
  input  logic [31:0]                    st_frames,
  input  logic [63:0]                    st_clocks,
  input  logic [4:0]                     st_action
);

  localparam int unsigned RWA = $clog2(ROM_BYTES / 4);
  localparam int unsigned WIW = $clog2(NW_TOTAL);
  localparam int unsigned DAW = $clog2(2 * N_GAMES);

  // ---------------- write channel ----------------
  logic          wr_go;
  logic [23:0]   wa;
  assign wr_go         = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_awready = wr_go;
  assign s_axi_wready  = wr_go;
  assign s_axi_bresp   = 2'b00;
  assign wa            = 24'(s_axi_awaddr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      {cmd_reset, cmd_start, cmd_stop} <= '0;
      game_id <= '0;
      desc_we <= 1'b0; desc_addr <= '0; desc_wdata <= '0;
      rom_we <= 1'b0; rom_waddr <= '0; rom_wdata <= '0; rom_wstrb <= '0;
      w_we <= 1'b0; w_idx <= '0; w_data <= '0;
    end else begin
      {cmd_reset, cmd_start, cmd_stop} <= '0;
      desc_we <= 1'b0;
      rom_we  <= 1'b0;
      w_we    <= 1'b0;
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (wr_go) begin
        s_axi_bvalid <= 1'b1;
        if (wa == REG_CMD) begin
          cmd_reset <= s_axi_wdata[0];
          cmd_start <= s_axi_wdata[1];
          cmd_stop  <= s_axi_wdata[2];
        end else if (wa == REG_GAME_ID) begin
          game_id <= s_axi_wdata[$clog2(N_GAMES)-1:0];
        end else if (wa >= DESC_BASE && wa < DESC_BASE + 24'(8 * N_GAMES)) begin
          desc_we    <= 1'b1;
          desc_addr  <= DAW'((wa - DESC_BASE) >> 2);
          desc_wdata <= s_axi_wdata;
        end else if (wa >= ROM_BASE && wa < ROM_BASE + 24'(ROM_BYTES)) begin
          rom_we    <= 1'b1;
          rom_waddr <= RWA'((wa - ROM_BASE) >> 2);
          rom_wdata <= s_axi_wdata;
          rom_wstrb <= s_axi_wstrb;
        end else if (wa >= WEIGHT_BASE && wa < WEIGHT_BASE + 24'(4 * NW_TOTAL)) begin
          w_we   <= 1'b1;
          w_idx  <= WIW'((wa - WEIGHT_BASE) >> 2);
          w_data <= act_t'(s_axi_wdata[15:0]);
        end
      end
    end
  end

  // ---------------- read channel ----------------
  logic [23:0] ra;
  assign ra            = 24'(s_axi_araddr);
  assign s_axi_arready = !s_axi_rvalid;
  assign s_axi_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
      if (s_axi_arvalid && s_axi_arready) begin
        s_axi_rvalid <= 1'b1;
        case (ra)
          REG_GAME_ID:   s_axi_rdata <= 32'(game_id);
          REG_STATUS:    s_axi_rdata <= {29'b0, st_running, st_dead, !st_dead};
          REG_SCORE:     s_axi_rdata <= st_score;
          REG_FRAMES:    s_axi_rdata <= st_frames;
          REG_CLOCKS_LO: s_axi_rdata <= st_clocks[31:0];
          REG_CLOCKS_HI: s_axi_rdata <= st_clocks[63:32];
          REG_ACTION:    s_axi_rdata <= 32'(st_action);
          default:       s_axi_rdata <= '0;
        endcase
      end
    end
  end

  // ---------------- handshake rules ----------------
  // a response stays valid, and its data stable, until accepted
  property p_hold_b;
    @(posedge clk) disable iff (!rst_n) s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid;
  endproperty
  property p_hold_r;
    @(posedge clk) disable iff (!rst_n)
      s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata);
  endproperty
  a_hold_b: assert property (p_hold_b) else $error("AXI B response dropped");
  a_hold_r: assert property (p_hold_r) else $error("AXI R response dropped or changed");

endmodule
