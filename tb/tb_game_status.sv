// tb_game_status: score and game-over readout from console RAM.
// A 128-byte RAM model with one cycle of read latency. Three games are
// described: a 3-byte BCD score with a lives counter (dead when it is 0), a
// 2-byte binary score with a flag bit (dead when bit 7 set) and a 1-byte BCD
// score without game-over detection. After each sample the score and dead
// outputs are compared with values computed from the RAM contents.
module tb_game_status;
  import fem_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [5:0] game_id;
  logic desc_we, sample, dead, updated;
  logic [6:0] desc_addr, ram_raddr;
  logic [31:0] desc_wdata, score;
  logic [7:0] ram [128];
  logic [7:0] ram_rdata;

  always_ff @(posedge clk) ram_rdata <= ram[ram_raddr];

  game_status dut (.clk, .rst_n, .clear, .game_id, .desc_we, .desc_addr, .desc_wdata, .sample,
                   .ram_raddr, .ram_rdata, .score, .dead, .updated);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wdesc(int g, logic [31:0] w0, logic [31:0] w1);
    desc_we <= 1; desc_addr <= 7'(2 * g); desc_wdata <= w0; @(posedge clk);
    desc_addr <= 7'(2 * g + 1); desc_wdata <= w1; @(posedge clk);
    desc_we <= 0;
  endtask

  task automatic do_sample(int exp_score, bit exp_dead);
    sample <= 1; @(posedge clk); sample <= 0;
    while (!updated) @(posedge clk);
    #1;
    checks += 2;
    if (score != 32'(exp_score)) begin failures++; $display("game %0d score %0d expected %0d", game_id, score, exp_score); end
    if (dead != exp_dead) begin failures++; $display("game %0d dead %0d expected %0d", game_id, dead, exp_dead); end
  endtask

  function automatic int bcd(logic [7:0] b);
    return int'(b[7:4]) * 10 + int'(b[3:0]);
  endfunction

  initial begin
    int lives;
    desc_we = 0; sample = 0; game_id = 0; desc_addr = '0; desc_wdata = '0;
    foreach (ram[i]) ram[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // game 5: score bytes at 0x10 (low), 0x11, 0x12, BCD; lives at 0x20, dead when 0
    wdesc(5, {7'b0, 1'b1, 1'b1, 7'h12, 1'b1, 7'h11, 1'b1, 7'h10}, {7'b0, 1'b1, 8'h00, 8'hff, 1'b0, 7'h20});
    // game 9: binary score bytes 0x40 (low), 0x41; dead when bit 7 of 0x33 is set
    wdesc(9, {7'b0, 1'b0, 8'h00, 1'b1, 7'h41, 1'b1, 7'h40}, {7'b0, 1'b1, 8'h80, 8'h80, 1'b0, 7'h33});
    // game 12: one BCD byte at 0x05, no game-over detection
    wdesc(12, {7'b0, 1'b1, 8'h00, 8'h00, 1'b1, 7'h05}, 32'h0);
    game_id = 5;
    lives = 3;
    for (int n = 0; n < 30; n++) begin
      ram[8'h10] = {4'($urandom_range(9)), 4'($urandom_range(9))};
      ram[8'h11] = {4'($urandom_range(9)), 4'($urandom_range(9))};
      ram[8'h12] = {4'($urandom_range(9)), 4'($urandom_range(9))};
      if (n % 10 == 9) lives--;
      ram[8'h20] = 8'(lives);
      do_sample(bcd(ram[8'h10]) + 100 * bcd(ram[8'h11]) + 10000 * bcd(ram[8'h12]), lives == 0);
    end
    game_id = 9;
    for (int n = 0; n < 30; n++) begin
      ram[8'h40] = 8'($urandom); ram[8'h41] = 8'($urandom); ram[8'h33] = 8'($urandom);
      do_sample(int'(ram[8'h40]) + 256 * int'(ram[8'h41]), ram[8'h33][7]);
    end
    game_id = 12;
    ram[8'h05] = 8'h42;
    do_sample(42, 1'b0);
    // clear returns to score 0, alive
    game_id = 5;
    clear <= 1; @(posedge clk); clear <= 0; @(posedge clk);
    checks++;
    if (score != 0 || dead) begin failures++; $display("clear failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
