// tb_rescale_bilinear: full-size 160x210 -> 84x84 re-sampling.
// Three frames: random pixels (checked within 2 grey levels of a
// floating-point bilinear reference, the RTL using 8-bit weights), a
// horizontal ramp (same tolerance) and a constant image (must be exact).
// Checks output count, sof on the first and frame_done on the last output
// pixel, and that the last output leaves 2 cycles after the edge that samples the last input.
module tb_rescale_bilinear;
  import fem_pkg::*;
  import tb_ref_pkg::*;

  localparam int IW = 160, IH = 210, OW = 84, OH = 84;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pix_luma_t pin, pout;
  logic fdone;
  rescale_bilinear dut (.clk, .rst_n, .pix_i(pin), .pix_o(pout), .frame_done(fdone));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned img [];
  real   expv [$];
  int    tol;
  int    nout, last_in_cyc, cyc;

  always @(posedge clk) cyc++;

  task automatic run_frame();
    nout = 0;
    for (int oy = 0; oy < OH; oy++)
      for (int ox = 0; ox < OW; ox++)
        expv.push_back(ref_bilinear(img, IW, IH, OW, OH, ox, oy));
    for (int i = 0; i < IW * IH; i++) begin
      pin <= '{valid: 1'b1, sof: (i == 0), luma: img[i]};
      @(posedge clk);
      if (i % 97 == 3) begin pin.valid <= 1'b0; @(posedge clk); end
    end
    last_in_cyc = cyc;
    pin <= '0;
    repeat (20) @(posedge clk);
    checks++;
    if (nout != OW * OH) begin failures++; $display("got %0d outputs", nout); end
  endtask

  initial begin
    pin = '0;
    img = new[IW * IH];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    tol = 2;
    foreach (img[i]) img[i] = byte'($urandom_range(255));
    run_frame();
    foreach (img[i]) img[i] = byte'((i % IW) * 255 / (IW - 1));
    run_frame();
    tol = 0;
    foreach (img[i]) img[i] = 8'd173;
    run_frame();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && pout.valid) begin
    real e;
    int ei;
    e = expv.pop_front();
    ei = int'($floor(e + 0.5));
    checks += 2;
    if (int'(pout.luma) - ei > tol || ei - int'(pout.luma) > tol) begin
      failures++; $display("out %0d: %0d expected %0.2f", nout, pout.luma, e);
    end
    if (pout.sof != (nout == 0) || fdone != (nout == OW * OH - 1)) begin
      failures++; $display("framing wrong at output %0d", nout);
    end
    if (fdone) begin
      checks++;
      if (cyc - last_in_cyc > 3) begin failures++; $display("last output %0d cycles late", cyc - last_in_cyc); end
    end
    nout++;
  end
endmodule
