// tb_rom_bram: 32-bit strobed writes, byte reads, full 32 KB.
// Writes the whole ROM with random words, then rewrites some words with
// partial strobes, and reads every byte back against a byte-array model.
module tb_rom_bram;
  localparam int B = 32768;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we;
  logic [12:0] waddr;
  logic [31:0] wdata;
  logic [3:0] wstrb;
  logic [14:0] raddr;
  logic [7:0] rdata;
  byte unsigned model [B];

  rom_bram dut (.clk, .we, .waddr, .wdata, .wstrb, .raddr, .rdata);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = '0; wdata = '0; wstrb = '0; raddr = '0;
    @(posedge clk);
    for (int w = 0; w < B / 4; w++) begin
      logic [31:0] d;
      d = $urandom;
      for (int b = 0; b < 4; b++) model[4 * w + b] = d[8 * b +: 8];
      we <= 1; waddr <= 13'(w); wdata <= d; wstrb <= 4'hf;
      @(posedge clk);
    end
    for (int n = 0; n < 500; n++) begin
      logic [31:0] d;
      logic [3:0] s;
      int w;
      d = $urandom; s = 4'($urandom); w = $urandom_range(B / 4 - 1);
      for (int b = 0; b < 4; b++) if (s[b]) model[4 * w + b] = d[8 * b +: 8];
      we <= 1; waddr <= 13'(w); wdata <= d; wstrb <= s;
      @(posedge clk);
    end
    we <= 0;
    for (int a = 0; a < B; a++) begin
      raddr <= 15'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata != model[a]) begin failures++; if (failures < 10) $display("byte %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
