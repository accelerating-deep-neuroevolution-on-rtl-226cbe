// rescale_bilinear: streaming bilinear down-scaling, 160x210 -> 84x84.
//
// Output pixel (ox, oy) samples the input at
//   sx = (ox + 0.5) * IN_W / OUT_W - 0.5,   sy = (oy + 0.5) * IN_H / OUT_H - 0.5
// (pixel-centre convention) and blends the four neighbours
// (x0, y0), (x0+1, y0), (x0, y0+1), (x0+1, y0+1) with x0 = floor(sx),
// y0 = floor(sy). Because the scale factor exceeds 1 in both axes, each
// input row pair (and each column pair within it) feeds at most one output
// row (column). The stage therefore needs only a one-row line buffer: while
// input row y0+1 streams in, every column is first blended vertically with the
// buffered row y0 (multiplier 1), and when column x0+1 arrives it is blended
// horizontally with column x0 (multiplier 2) to give one output pixel.
// Positions are tracked exactly as fractions with denominator 2*OUT, by adding
// 2*IN per output step; weights are the fractions rounded to WFRAC bits.
//
// The paper specifies the sizes and bilinear filtering; the sampling
// convention, the weight precision and the rounding are this design's
// choices. Requires IN_W > OUT_W and IN_H > OUT_H.
//
// Interface: pix_i is the raster-order input stream (sof on pixel (0,0));
// pix_o is the 84x84 output stream in raster order, sof on its first pixel,
// frame_done with its last one. Timing: accepts one pixel per cycle with any
// gaps; an output pixel appears 2 cycles after the input pixel that completes it.
module rescale_bilinear
  import fem_pkg::*;
#(
  parameter int unsigned IN_W  = fem_pkg::FRAME_W,
  parameter int unsigned IN_H  = fem_pkg::FRAME_H,
  parameter int unsigned OUT_W = fem_pkg::NET_W,
  parameter int unsigned OUT_H = fem_pkg::NET_H,
  parameter int unsigned WFRAC = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  input  pix_luma_t pix_i,
  output pix_luma_t pix_o,
  output logic      frame_done
);

  localparam int unsigned XW  = $clog2(IN_W + 1);
  localparam int unsigned YW  = $clog2(IN_H + 1);
  localparam int unsigned DX  = 2 * OUT_W;          // denominators
  localparam int unsigned DY  = 2 * OUT_H;
  localparam int unsigned QX  = (2 * IN_W) / DX;    // whole part of a step
  localparam int unsigned RX  = (2 * IN_W) % DX;    // fractional part of a step
  localparam int unsigned QY  = (2 * IN_H) / DY;
  localparam int unsigned RY  = (2 * IN_H) % DY;
  localparam int unsigned X00 = (IN_W - OUT_W) / DX;  // position of output 0
  localparam int unsigned RX0 = (IN_W - OUT_W) % DX;
  localparam int unsigned Y00 = (IN_H - OUT_H) / DY;
  localparam int unsigned RY0 = (IN_H - OUT_H) % DY;
  localparam int unsigned RXW = $clog2(2 * DX + 1);
  localparam int unsigned RYW = $clog2(2 * DY + 1);
  localparam int unsigned OXW = $clog2(OUT_W + 1);
  localparam int unsigned OYW = $clog2(OUT_H + 1);
  localparam int unsigned ONE = 1 << WFRAC;

  // fraction r/D rounded to WFRAC bits (0 .. ONE)
  function automatic logic [WFRAC:0] frac_w(input int unsigned r, input int unsigned d);
    return (WFRAC+1)'((r * ONE + d / 2) / d);
  endfunction

  // ---------------- stage 0: position counters, line-buffer read ----------
  logic [XW-1:0] xcnt, x0_in;
  logic [YW-1:0] ycnt, y0_in;
  logic [7:0]    line_buf [IN_W];

  assign x0_in = pix_i.sof ? '0 : xcnt;
  assign y0_in = pix_i.sof ? '0 : ycnt;

  logic          s1_valid;
  logic [XW-1:0] s1_x;
  logic [YW-1:0] s1_y;
  logic [7:0]    s1_b;      // current row pixel
  logic [7:0]    s1_a;      // buffered row pixel (row above)

  always_ff @(posedge clk) begin
    if (pix_i.valid) begin
      s1_a            <= line_buf[x0_in];
      line_buf[x0_in] <= pix_i.luma;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xcnt <= '0; ycnt <= '0;
      s1_valid <= 1'b0; s1_x <= '0; s1_y <= '0; s1_b <= '0;
    end else begin
      s1_valid <= pix_i.valid;
      if (pix_i.valid) begin
        s1_x <= x0_in;
        s1_y <= y0_in;
        s1_b <= pix_i.luma;
        if (x0_in == XW'(IN_W - 1)) begin
          xcnt <= '0;
          ycnt <= y0_in + 1'b1;
        end else begin
          xcnt <= x0_in + 1'b1;
          ycnt <= y0_in;
        end
      end
    end
  end

  // ---------------- stage 1: vertical then horizontal blend ----------------
  logic [OYW-1:0] oy;
  logic [YW-1:0]  sy0;
  logic [RYW-1:0] ry;
  logic [OXW-1:0] ox;
  logic [XW-1:0]  sx0;
  logic [RXW-1:0] rx;
  logic [15:0]    v_prev;   // vertical blend of column x-1, scaled by ONE

  logic            row_active, col_hit;
  logic [WFRAC:0]  wy, wx;
  logic signed [9:0]  dv;
  logic signed [19:0] vprod;
  logic [15:0]        v_cur;
  logic signed [17:0] dh;
  logic signed [27:0] hprod;
  logic [27:0]        hsum;

  assign row_active = s1_valid && (s1_y == sy0 + 1'b1) && (oy < OYW'(OUT_H));
  assign col_hit    = row_active && (s1_x == sx0 + 1'b1) && (ox < OXW'(OUT_W));
  assign wy         = frac_w(int'(ry), DY);
  assign wx         = frac_w(int'(rx), DX);

  always_comb begin
    dv    = $signed({2'b00, s1_b}) - $signed({2'b00, s1_a});
    vprod = dv * $signed({1'b0, wy});                       // multiplier 1
    v_cur = 16'($signed({4'b0, s1_a, 8'b0}) + vprod);
    dh    = $signed({2'b00, v_cur}) - $signed({2'b00, v_prev});
    hprod = dh * $signed({1'b0, wx});                       // multiplier 2
    hsum  = 28'($signed({4'b0, v_prev, 8'b0}) + hprod + $signed(28'(1 << 15)));
  end

  // step an output coordinate: position q + r/D advances by (Q + R/D)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oy <= '0; sy0 <= YW'(Y00); ry <= RYW'(RY0);
      ox <= '0; sx0 <= XW'(X00); rx <= RXW'(RX0);
      v_prev <= '0;
      pix_o <= '0;
      frame_done <= 1'b0;
    end else begin
      pix_o.valid <= 1'b0;
      pix_o.sof   <= 1'b0;
      frame_done  <= 1'b0;
      if (row_active) begin
        v_prev <= v_cur;
        if (col_hit) begin
          pix_o.valid <= 1'b1;
          pix_o.sof   <= (ox == '0) && (oy == '0);
          pix_o.luma  <= hsum[23:16];
          frame_done  <= (ox == OXW'(OUT_W - 1)) && (oy == OYW'(OUT_H - 1));
          ox <= ox + 1'b1;
          if (rx + RXW'(RX) >= RXW'(DX)) begin
            rx  <= rx + RXW'(RX) - RXW'(DX);
            sx0 <= sx0 + XW'(QX + 1);
          end else begin
            rx  <= rx + RXW'(RX);
            sx0 <= sx0 + XW'(QX);
          end
        end
        if (s1_x == XW'(IN_W - 1)) begin
          // end of the active row: next output row, columns restart
          ox <= '0; sx0 <= XW'(X00); rx <= RXW'(RX0);
          oy <= oy + 1'b1;
          if (ry + RYW'(RY) >= RYW'(DY)) begin
            ry  <= ry + RYW'(RY) - RYW'(DY);
            sy0 <= sy0 + YW'(QY + 1);
          end else begin
            ry  <= ry + RYW'(RY);
            sy0 <= sy0 + YW'(QY);
          end
        end
      end
      if (pix_i.valid && pix_i.sof) begin
        // new frame: restart the output raster (takes priority)
        oy <= '0; sy0 <= YW'(Y00); ry <= RYW'(RY0);
        ox <= '0; sx0 <= XW'(X00); rx <= RXW'(RX0);
      end
    end
  end

endmodule
