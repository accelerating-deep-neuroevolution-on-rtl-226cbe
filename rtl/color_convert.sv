// color_convert: palette index to luminance (first pre-processing stage).
//
// The console emits a 7-bit index into its 128-colour NTSC palette. This
// stage looks up the colour's RGB value in a 128-entry table and reduces it to
// one 8-bit luminance with the ITU BT.601 weights,
//   Y = (77*R + 150*G + 29*B + 128) >> 8   (0.299, 0.587, 0.114 in 1/256ths),
// which keeps far more grey levels than the console's own 3-bit luminance.
// Converting with BT.601 follows the paper; the palette table (the common
// NTSC palette of Atari emulators, file rtl/ntsc_palette.hex) and the 8-bit
// integer weights are this design's choices. With this table 95 distinct
// grey levels result; the paper, with its console core's palette, reports 124.
//
// Interface: pix_i / pix_o are valid/sof pixel streams (fem_pkg). Timing:
// fully pipelined, one pixel per cycle, latency 2 cycles (table read, then
// weighted sum).
module color_convert
  import fem_pkg::*;
#(
  parameter string PALETTE_FILE = "rtl/ntsc_palette.hex"
) (
  input  logic       clk,
  input  logic       rst_n,
  input  pix_color_t pix_i,
  output pix_luma_t  pix_o
);

  logic [23:0] palette [128];
  initial $readmemh(PALETTE_FILE, palette);

  logic [23:0] rgb_q;
  logic        valid_q, sof_q;

  always_ff @(posedge clk) rgb_q <= palette[pix_i.color];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      sof_q   <= 1'b0;
    end else begin
      valid_q <= pix_i.valid;
      sof_q   <= pix_i.sof & pix_i.valid;
    end
  end

  logic [17:0] ysum;
  always_comb begin
    ysum = 18'd77  * 18'(rgb_q[23:16])
         + 18'd150 * 18'(rgb_q[15:8])
         + 18'd29  * 18'(rgb_q[7:0])
         + 18'd128;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pix_o <= '0;
    end else begin
      pix_o.valid <= valid_q;
      pix_o.sof   <= sof_q;
      pix_o.luma  <= ysum[15:8];
    end
  end

endmodule
