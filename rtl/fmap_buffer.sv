// fmap_buffer: feature-map buffer between two network layers.
//
// Stores N_ELEMS 16-bit activations in height-width-channel order. The
// producing layer writes WR_LANES consecutive elements (its KPF output
// channels) per cycle; the consuming layer reads RD_LANES consecutive
// elements (its CPF input channels) per cycle. WR_LANES must be a multiple of
// RD_LANES: a RAM word holds WR_LANES elements and a read selects one
// RD_LANES-wide slice of it. Where the paper's alternating CPF/KPF choice makes
// the two widths equal, the buffer is a plain one-word-per-access RAM.
//
// Interface: we/waddr (in WR_LANES units)/wdata; raddr (in RD_LANES units),
// rdata valid one cycle later.
module fmap_buffer
  import fem_pkg::*;
#(
  parameter int unsigned N_ELEMS  = 12800,
  parameter int unsigned WR_LANES = 32,
  parameter int unsigned RD_LANES = 32,
  parameter int unsigned WWORDS   = N_ELEMS / WR_LANES,
  parameter int unsigned RWORDS   = N_ELEMS / RD_LANES
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [$clog2(WWORDS)-1:0]   waddr,
  input  act_t                        wdata [WR_LANES],
  input  logic [$clog2(RWORDS)-1:0]   raddr,
  output act_t                        rdata [RD_LANES]
);

  localparam int unsigned RATIO = WR_LANES / RD_LANES;
  localparam int unsigned SW    = (RATIO > 1) ? $clog2(RATIO) : 1;

  act_t          mem [WWORDS][WR_LANES];
  act_t          word_q [WR_LANES];
  logic [SW-1:0] slice_q;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    word_q  <= mem[$clog2(WWORDS)'(raddr / RATIO)];
    slice_q <= SW'(raddr % RATIO);
  end

  always_comb
    for (int l = 0; l < RD_LANES; l++)
      rdata[l] = word_q[int'(slice_q) * RD_LANES + l];

endmodule
