// tb_frame_pool: max of current and previous frame, on a small 8x6 frame.
// Four random frames with gaps in the stream; the first after clear must pass
// unchanged, the others must equal the per-pixel maximum with the frame
// before. Then clear, and the next frame must pass unchanged again.
module tb_frame_pool;
  import fem_pkg::*;

  localparam int W = 8, H = 6, N = W * H;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int pool_hits = 0;

  pix_luma_t pin, pout;
  frame_pool #(.FRAME_W(W), .FRAME_H(H)) dut (.clk, .rst_n, .clear, .pix_i(pin), .pix_o(pout));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned frames [6][N];
  int expq [$];

  task automatic send_frame(int f);
    for (int i = 0; i < N; i++) begin
      pin <= '{valid: 1'b1, sof: (i == 0), luma: frames[f][i]};
      @(posedge clk);
      if ($urandom_range(3) == 0) begin pin.valid <= 1'b0; @(posedge clk); end
    end
    pin <= '0;
    @(posedge clk);
  endtask

  initial begin
    pin = '0;
    for (int f = 0; f < 6; f++)
      for (int i = 0; i < N; i++) frames[f][i] = byte'($urandom_range(255));
    for (int f = 0; f < 6; f++)
      for (int i = 0; i < N; i++)
        if (f == 0 || f == 4) expq.push_back(frames[f][i]);
        else begin
          expq.push_back(frames[f][i] > frames[f-1][i] ? frames[f][i] : frames[f-1][i]);
          if (frames[f-1][i] > frames[f][i]) pool_hits++;
        end
    repeat (3) @(posedge clk);
    rst_n = 1;
    clear <= 1; @(posedge clk); clear <= 0;
    for (int f = 0; f < 4; f++) send_frame(f);
    repeat (3) @(posedge clk);
    clear <= 1; @(posedge clk); clear <= 0;
    send_frame(4);
    send_frame(5);
    repeat (5) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    checks++;
    if (pool_hits == 0) begin failures++; $display("no pixel took the previous frame"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && pout.valid) begin
    int e;
    e = expq.pop_front();
    checks++;
    if (int'(pout.luma) != e) begin failures++; $display("pool out %0d expected %0d", pout.luma, e); end
  end
endmodule
