// tb_color_convert: all 128 palette entries through the colour conversion.
// The expected luminance comes from the palette RGB values and the BT.601
// weights computed in floating point (one grey level of tolerance); the
// latency of two cycles and the sof/valid pipeline are checked too.
module tb_color_convert;
  import fem_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pix_color_t pin;
  pix_luma_t  pout;
  logic [23:0] pal [128];

  color_convert dut (.clk, .rst_n, .pix_i(pin), .pix_o(pout));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent [$];
  initial begin
    $readmemh("rtl/ntsc_palette.hex", pal);
    pin = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 128; i++) begin
      pin <= '{valid: 1'b1, sof: (i == 0), color: 7'(i)};
      @(posedge clk);
      if (i % 5 == 4) begin pin.valid <= 1'b0; @(posedge clk); end
    end
    pin <= '0;
    repeat (10) @(posedge clk);
    checks++;
    if (sent.size() != 0) begin failures++; $display("missing %0d outputs", sent.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected stream, with latency check: input at cycle t leaves at t+2
  int cyc = 0;
  int in_cyc [$];
  always @(posedge clk) begin
    cyc++;
    if (pin.valid) begin sent.push_back(pin.color); in_cyc.push_back(cyc); end
    if (rst_n && pout.valid) begin
      int c, e, t;
      c = sent.pop_front();
      t = in_cyc.pop_front();
      e = ref_luma(pal[c][23:16], pal[c][15:8], pal[c][7:0]);
      checks += 3;
      if (int'(pout.luma) - e > 1 || e - int'(pout.luma) > 1) begin
        failures++; $display("color %0d: luma %0d expected %0d", c, pout.luma, e);
      end
      if (cyc - t != 2) begin failures++; $display("latency %0d", cyc - t); end
      if (pout.sof != (c == 0)) begin failures++; $display("sof wrong at %0d", c); end
    end
  end
endmodule
