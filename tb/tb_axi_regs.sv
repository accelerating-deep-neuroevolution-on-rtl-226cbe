// tb_axi_regs: AXI4-Lite decoding of the register map.
// Writes to every region (command bits, game id, descriptor table, ROM with
// strobes, weights) must produce exactly one strobe with the right decoded
// address and data; reads of every status register must return the values
// on the status inputs; writes outside the map must produce no strobe. The
// master sometimes delays BREADY/RREADY to exercise response holding.
module tb_axi_regs;
  import fem_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [23:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  logic cmd_reset, cmd_start, cmd_stop, desc_we, rom_we, w_we;
  logic [5:0] game_id;
  logic [6:0] desc_addr;
  logic [31:0] desc_wdata, rom_wdata;
  logic [12:0] rom_waddr;
  logic [3:0] rom_wstrb;
  logic [17:0] w_idx;
  act_t w_data;
  logic st_dead, st_running;
  logic [31:0] st_score, st_frames;
  logic [63:0] st_clocks;
  logic [4:0] st_action;

  axi_regs dut (.clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .cmd_reset, .cmd_start, .cmd_stop, .game_id, .desc_we, .desc_addr, .desc_wdata,
    .rom_we, .rom_waddr, .rom_wdata, .rom_wstrb, .w_we, .w_idx, .w_data,
    .st_dead, .st_running, .st_score, .st_frames, .st_clocks, .st_action);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // strobe log
  int n_cmd = 0, n_desc = 0, n_rom = 0, n_w = 0;
  logic [2:0] last_cmd;
  always @(posedge clk) if (rst_n) begin
    if (cmd_reset | cmd_start | cmd_stop) begin n_cmd++; last_cmd = {cmd_stop, cmd_start, cmd_reset}; end
    if (desc_we) n_desc++;
    if (rom_we) n_rom++;
    if (w_we) n_w++;
  end

  task automatic axi_write(logic [23:0] a, logic [31:0] d, logic [3:0] s);
    awaddr <= a; awvalid <= 1; wdata <= d; wstrb <= s; wvalid <= 1;
    @(posedge clk);
    while (!(awready && wready)) @(posedge clk);
    awvalid <= 0; wvalid <= 0;
    bready <= 0;
    repeat ($urandom_range(2)) @(posedge clk);
    bready <= 1;
    @(posedge clk);
    while (!bvalid) @(posedge clk);
    bready <= 0;
  endtask

  task automatic axi_read(logic [23:0] a, output logic [31:0] d);
    araddr <= a; arvalid <= 1; rready <= 0;
    @(posedge clk);
    while (!arready) @(posedge clk);
    arvalid <= 0;
    repeat ($urandom_range(2)) @(posedge clk);
    rready <= 1;
    @(posedge clk);
    while (!rvalid) @(posedge clk);
    d = rdata;
    rready <= 0;
  endtask

  task automatic expect_eq(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: %0h expected %0h", what, got, exp); end
  endtask

  // capture of the decoded values on their strobes
  logic [6:0] c_daddr; logic [31:0] c_ddata, c_rdata; logic [12:0] c_raddr; logic [3:0] c_rstrb;
  logic [17:0] c_widx; act_t c_wdata;
  always @(posedge clk) begin
    if (desc_we) begin c_daddr = desc_addr; c_ddata = desc_wdata; end
    if (rom_we) begin c_raddr = rom_waddr; c_rdata = rom_wdata; c_rstrb = rom_wstrb; end
    if (w_we) begin c_widx = w_idx; c_wdata = w_data; end
  end

  initial begin
    logic [31:0] d;
    awaddr = '0; araddr = '0; awvalid = 0; wvalid = 0; wdata = '0; wstrb = '0;
    bready = 0; arvalid = 0; rready = 0;
    st_dead = 0; st_running = 1; st_score = 32'd12345; st_frames = 32'd777;
    st_clocks = 64'h0000_0012_3456_789a; st_action = 5'd13;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    axi_write(REG_CMD, 32'h2, 4'hf); @(posedge clk);
    expect_eq("start strobe", {n_cmd, 29'b0, last_cmd}, {32'd1, 29'b0, 3'b010});
    axi_write(REG_CMD, 32'h4, 4'hf); @(posedge clk);
    expect_eq("stop strobe", {29'b0, last_cmd}, 3'b100);
    axi_write(REG_CMD, 32'h1, 4'hf); @(posedge clk);
    expect_eq("reset strobe", {29'b0, last_cmd}, 3'b001);
    axi_write(REG_GAME_ID, 32'd37, 4'hf);
    expect_eq("game id", game_id, 37);
    axi_write(DESC_BASE + 24'h0ac, 32'hdead_beef, 4'hf); @(posedge clk);
    expect_eq("desc addr", c_daddr, 7'h2b);
    expect_eq("desc data", c_ddata, 32'hdead_beef);
    axi_write(ROM_BASE + 24'h7ffc, 32'h1234_5678, 4'b0101); @(posedge clk);
    expect_eq("rom addr", c_raddr, 13'h1fff);
    expect_eq("rom data", c_rdata, 32'h1234_5678);
    expect_eq("rom strobe", c_rstrb, 4'b0101);
    axi_write(WEIGHT_BASE + 24'(4 * (NW_TOTAL - 1)), 32'h0000_8001, 4'hf); @(posedge clk);
    expect_eq("weight index", c_widx, NW_TOTAL - 1);
    expect_eq("weight data", {48'b0, c_wdata}, 64'h8001);
    axi_write(WEIGHT_BASE + 24'(4 * NW_TOTAL), 32'h1, 4'hf);   // beyond the weights
    axi_write(24'h00_0800, 32'h1, 4'hf);                      // unmapped
    @(posedge clk);
    expect_eq("strobe counts", {n_cmd, n_desc, n_rom, n_w}, {32'd3, 32'd1, 32'd1, 32'd1});
    axi_read(REG_STATUS, d);    expect_eq("status", d, 32'b101);
    st_dead = 1; st_running = 0;
    axi_read(REG_STATUS, d);    expect_eq("status dead", d, 32'b010);
    axi_read(REG_SCORE, d);     expect_eq("score", d, 12345);
    axi_read(REG_FRAMES, d);    expect_eq("frames", d, 777);
    axi_read(REG_CLOCKS_LO, d); expect_eq("clocks lo", d, 32'h3456_789a);
    axi_read(REG_CLOCKS_HI, d); expect_eq("clocks hi", d, 32'h12);
    axi_read(REG_ACTION, d);    expect_eq("action", d, 13);
    axi_read(REG_GAME_ID, d);   expect_eq("game id read", d, 37);
    expect_eq("responses OKAY", {bresp, rresp}, 4'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
