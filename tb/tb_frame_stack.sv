// tb_frame_stack: four 6x5 frames become the four channels of one input.
// Checks that stack_ready pulses once, after the fourth frame only, that every
// pixel of every channel reads back as luminance/4, that a fifth frame starts
// a new group in channel 0, and that clear restarts the grouping.
module tb_frame_stack;
  import fem_pkg::*;

  localparam int W = 6, H = 5, N = W * H;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pix_luma_t pin;
  logic ready;
  logic [$clog2(N)-1:0] raddr;
  act_t rdata [4];
  int nready = 0;

  frame_stack #(.W(W), .H(H)) dut (.clk, .rst_n, .clear, .pix_i(pin), .stack_ready(ready),
                                   .rd_addr(raddr), .rd_data(rdata));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && ready) nready++;

  byte unsigned fr [5][N];

  task automatic send(int f);
    for (int i = 0; i < N; i++) begin
      pin <= '{valid: 1'b1, sof: (i == 0), luma: fr[f][i]};
      @(posedge clk);
    end
    pin <= '0;
    @(posedge clk);
  endtask

  task automatic check_all(int f0);
    for (int i = 0; i < N; i++) begin
      raddr <= $clog2(N)'(i);
      @(posedge clk); #1;
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (rdata[c] != act_t'(fr[f0 + c][i] >> 2)) begin
          failures++; $display("pixel %0d ch %0d: %0d", i, c, rdata[c]);
        end
      end
    end
  endtask

  initial begin
    pin = '0; raddr = '0;
    foreach (fr[f, i]) fr[f][i] = byte'($urandom_range(255));
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) send(f);
    repeat (3) @(posedge clk);
    checks++;
    if (nready != 0) begin failures++; $display("ready too early"); end
    send(3);
    repeat (3) @(posedge clk);
    checks++;
    if (nready != 1) begin failures++; $display("ready count %0d", nready); end
    check_all(0);
    // a fifth frame goes to channel 0 of the next group
    send(4);
    @(posedge clk);
    raddr <= 7; @(posedge clk); #1;
    checks++;
    if (rdata[0] != act_t'(fr[4][7] >> 2) || rdata[1] != act_t'(fr[1][7] >> 2)) begin
      failures++; $display("next group not in channel 0");
    end
    // clear: three more frames must not complete a group
    clear <= 1; @(posedge clk); clear <= 0;
    for (int f = 0; f < 3; f++) send(f);
    repeat (3) @(posedge clk);
    checks++;
    if (nready != 1) begin failures++; $display("clear did not restart grouping"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
