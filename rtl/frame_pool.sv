// frame_pool: max-pooling of each pixel over two consecutive frames.
//
// Some games draw a sprite only in every other frame. To keep such sprites
// visible, this stage keeps the previous frame in a FRAME_W*FRAME_H byte RAM
// and outputs, for every pixel, the brighter of the current and the previous
// value, then overwrites the stored pixel with the current one (the paper's
// frame-pooling module). Pixels arrive in raster order; the pixel address is
// counted from the start-of-frame flag.
//
// Own choices: after `clear` (a loop reset) the stored frame counts as black
// until one full frame has been written, so nothing of the previous game leaks
// into the new one.
//
// Interface: pix_i / pix_o luminance streams. Timing: one pixel per cycle,
// latency 1 cycle (RAM read-before-write at the same address).
module frame_pool
  import fem_pkg::*;
#(
  parameter int unsigned FRAME_W = fem_pkg::FRAME_W,
  parameter int unsigned FRAME_H = fem_pkg::FRAME_H
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clear,
  input  pix_luma_t pix_i,
  output pix_luma_t pix_o
);

  localparam int unsigned N  = FRAME_W * FRAME_H;
  localparam int unsigned AW = $clog2(N);

  logic [7:0]    prev_mem [N];
  logic [AW-1:0] addr_cnt;
  logic [AW-1:0] addr;
  logic          have_prev;   // a full frame has been stored since clear
  logic          started;     // a frame has begun since clear
  logic [7:0]    prev_q;
  logic [7:0]    cur_q;
  logic          valid_q, sof_q, use_prev_q;

  assign addr = pix_i.sof ? '0 : addr_cnt;

  always_ff @(posedge clk) begin
    if (pix_i.valid) begin
      prev_q            <= prev_mem[addr];
      prev_mem[addr]    <= pix_i.luma;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr_cnt   <= '0;
      have_prev  <= 1'b0;
      started    <= 1'b0;
      valid_q    <= 1'b0;
      sof_q      <= 1'b0;
      use_prev_q <= 1'b0;
      cur_q      <= '0;
    end else begin
      valid_q <= pix_i.valid;
      sof_q   <= pix_i.valid & pix_i.sof;
      if (clear) begin
        have_prev <= 1'b0;
        started   <= 1'b0;
        addr_cnt  <= '0;
      end else if (pix_i.valid) begin
        cur_q      <= pix_i.luma;
        addr_cnt   <= (addr == AW'(N - 1)) ? '0 : addr + 1'b1;
        use_prev_q <= have_prev | (pix_i.sof & started);
        if (pix_i.sof) begin
          // a second start of frame means one whole frame is stored
          if (started) have_prev <= 1'b1;
          started <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    pix_o.valid = valid_q;
    pix_o.sof   = sof_q;
    pix_o.luma  = (use_prev_q && prev_q > cur_q) ? prev_q : cur_q;
  end

endmodule
