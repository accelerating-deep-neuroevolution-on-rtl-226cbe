// frame_stack: groups four pre-processed frames into the 84x84x4 network input.
//
// Frame k (k = 0..3) of a group is written into channel k of an H*W-word
// buffer whose words hold the four channels of one pixel, so that the first
// layer (which reads 4 input channels per cycle) fetches one pixel, all
// channels, per read. After the fourth frame of a group has been written,
// stack_ready pulses and the next frame starts a new group at channel 0.
// Groups do not overlap: the network sees each console frame once, and
// decides one action per four frames.
//
// Stacking four frames as channels follows the paper. The activation
// encoding is this design's: luminance L (0..255) is handed to the network as
// L>>2 in the 16-bit format with 6 fractional bits, i.e. L/256 in [0, 1).
// Bits [15:6] of each rd_data channel are therefore always zero; the port
// keeps the network's 16-bit activation type.
//
// Interface: pix_i 84x84 luminance stream (sof on its first pixel); clear
// restarts at channel 0. Read port: rd_addr = pixel index y*W+x, rd_data
// (4 channels) valid one cycle later. Timing: one pixel per cycle; stack_ready
// comes one cycle after the last pixel of the fourth frame.
module frame_stack
  import fem_pkg::*;
#(
  parameter int unsigned W     = fem_pkg::NET_W,
  parameter int unsigned H     = fem_pkg::NET_H,
  parameter int unsigned DEPTH = fem_pkg::STACK
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  pix_luma_t                     pix_i,
  output logic                          stack_ready,
  input  logic [$clog2(W*H)-1:0]        rd_addr,
  output act_t                          rd_data [DEPTH]
);

  localparam int unsigned N  = W * H;
  localparam int unsigned AW = $clog2(N);
  localparam int unsigned CW = $clog2(DEPTH);

  logic [7:0]    mem [N][DEPTH];
  logic [AW-1:0] wcnt, waddr;
  logic [CW-1:0] chan;
  logic [7:0]    rd_q [DEPTH];

  assign waddr = pix_i.sof ? '0 : wcnt;

  always_ff @(posedge clk) begin
    if (pix_i.valid) mem[waddr][chan] <= pix_i.luma;
    rd_q <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt <= '0;
      chan <= '0;
      stack_ready <= 1'b0;
    end else begin
      stack_ready <= 1'b0;
      if (clear) begin
        wcnt <= '0;
        chan <= '0;
      end else if (pix_i.valid) begin
        if (waddr == AW'(N - 1)) begin
          wcnt <= '0;
          if (chan == CW'(DEPTH - 1)) begin
            chan <= '0;
            stack_ready <= 1'b1;
          end else begin
            chan <= chan + 1'b1;
          end
        end else begin
          wcnt <= waddr + 1'b1;
        end
      end
    end
  end

  always_comb
    for (int c = 0; c < DEPTH; c++) rd_data[c] = act_t'({8'b0, rd_q[c]} >> 2);

endmodule
