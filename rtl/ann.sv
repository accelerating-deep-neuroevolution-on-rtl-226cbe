// ann: the network that maps four stacked 84x84 frames to 18 action values.
//
//   layer  operation        kernel / stride  output      ReLU  CPF  KPF
//   1      convolution      8x8 / 4          20x20x32    yes    4   32
//   2      convolution      4x4 / 2           9x9x64     yes   32    4
//   3      convolution      3x3 / 1           7x7x64     yes    4   32
//   4      inner product    -                 18         no     4    1
//
// No padding, no biases: 8,192 + 32,768 + 36,864 + 56,448 = 134,272 weights,
// all held on chip. Shape, parallelism factors (CPF/KPF), 16-bit format and
// weight count are the paper's. Alternating CPF and KPF makes the output
// width of one layer equal the input width of the next (32->32, 4->4), so the
// buffers between layers are simple RAMs; only layer 3 -> 4 (32 written, 4
// read) needs a slice select.
//
// All four layers start together and are chained row by row: each layer
// works on output rows whose input rows its producer has already written
// (conv_layer in_rows/out_rows), so layer 2 follows layer 1 at a distance of
// a few rows, and so on. Feature maps are still held whole (fmap_buffer),
// which keeps the buffers simple at the cost of some block RAM. The paper's
// network generator is layer-pipelined; this row-level chaining is this
// design's way of getting the same overlap. Issue work: 25,600 + 20,736 +
// 14,112 + 14,112 = 74,560 cycles if run one after another; chained, a pass
// takes about 25,600 (layer 1) + 2,304 + 2,016 + 112 + 13,328 (the parts of
// layers 2-4 that must follow layer 1's last row), 43,264 cycles in
// simulation.
//
// Interface: start pulse; in_raddr/in_rdata read the frame stack (one pixel,
// 4 channels, one cycle latency). w_we/w_idx/w_data write one weight at flat
// index w_idx: layers are concatenated in order, each in its conv_layer
// word*LANES+lane layout. The 18 outputs leave on q_valid/q_idx/q_value, one
// per cycle in action order; done pulses with the last.
module ann
  import fem_pkg::*;
#(
  parameter int unsigned CPF1 = 4,  parameter int unsigned KPF1 = 32,
  parameter int unsigned CPF2 = 32, parameter int unsigned KPF2 = 4,
  parameter int unsigned CPF3 = 4,  parameter int unsigned KPF3 = 32,
  parameter int unsigned CPF4 = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  output logic                           done,
  output logic                           busy,
  output logic [$clog2(NET_W*NET_H)-1:0] in_raddr,
  input  act_t                           in_rdata [STACK],
  input  logic                           w_we,
  input  logic [$clog2(NW_TOTAL)-1:0]    w_idx,
  input  act_t                           w_data,
  output logic                           q_valid,
  output logic [4:0]                     q_idx,
  output act_t                           q_value
);

  localparam int unsigned WIW = $clog2(NW_TOTAL);

  // weight write decode
  logic we1, we2, we3, we4;
  logic [WIW-1:0] wo1, wo2, wo3, wo4;
  always_comb begin
    we1 = w_we && (w_idx <  WIW'(WBASE_L2));
    we2 = w_we && (w_idx >= WIW'(WBASE_L2)) && (w_idx < WIW'(WBASE_L3));
    we3 = w_we && (w_idx >= WIW'(WBASE_L3)) && (w_idx < WIW'(WBASE_L4));
    we4 = w_we && (w_idx >= WIW'(WBASE_L4)) && (w_idx < WIW'(NW_TOTAL));
    wo1 = w_idx;
    wo2 = w_idx - WIW'(WBASE_L2);
    wo3 = w_idx - WIW'(WBASE_L3);
    wo4 = w_idx - WIW'(WBASE_L4);
  end

  logic st1, st2, st3, st4, dn1, dn2, dn3, dn4, bz1, bz2, bz3, bz4;
  logic [4:0] r1;      // output rows completed by each layer
  logic [3:0] r2;
  logic [2:0] r3;
  logic       r4;

  // ---------------- layer 1 ----------------
  localparam int unsigned L1_OW = 20 * 20 * 32 / KPF1;
  logic                     o1_we;
  logic [$clog2(L1_OW)-1:0] o1_wa;
  act_t                     o1_wd [KPF1];

  conv_layer #(.IN_W(84), .IN_H(84), .IN_C(4), .K(8), .S(4), .OUT_C(32),
               .CPF(CPF1), .KPF(KPF1), .RELU(1'b1)) u_l1 (
    .clk, .rst_n, .start(st1), .busy(bz1), .done(dn1),
    .in_rows(7'(84)), .out_rows(r1),
    .in_raddr(in_raddr), .in_rdata(in_rdata),
    .w_we(we1), .w_addr(wo1[$clog2(NW_L1)-1:0]), .w_data(w_data),
    .out_we(o1_we), .out_waddr(o1_wa), .out_wdata(o1_wd));

  // ---------------- buffer 1 ----------------
  localparam int unsigned L2_IW = 20 * 20 * 32 / CPF2;
  logic [$clog2(L2_IW)-1:0] i2_ra;
  act_t                     i2_rd [CPF2];

  fmap_buffer #(.N_ELEMS(20*20*32), .WR_LANES(KPF1), .RD_LANES(CPF2)) u_b1 (
    .clk, .we(o1_we), .waddr(o1_wa), .wdata(o1_wd), .raddr(i2_ra), .rdata(i2_rd));

  // ---------------- layer 2 ----------------
  localparam int unsigned L2_OW = 9 * 9 * 64 / KPF2;
  logic                     o2_we;
  logic [$clog2(L2_OW)-1:0] o2_wa;
  act_t                     o2_wd [KPF2];

  conv_layer #(.IN_W(20), .IN_H(20), .IN_C(32), .K(4), .S(2), .OUT_C(64),
               .CPF(CPF2), .KPF(KPF2), .RELU(1'b1)) u_l2 (
    .clk, .rst_n, .start(st2), .busy(bz2), .done(dn2),
    .in_rows(r1), .out_rows(r2),
    .in_raddr(i2_ra), .in_rdata(i2_rd),
    .w_we(we2), .w_addr(wo2[$clog2(NW_L2)-1:0]), .w_data(w_data),
    .out_we(o2_we), .out_waddr(o2_wa), .out_wdata(o2_wd));

  // ---------------- buffer 2 ----------------
  localparam int unsigned L3_IW = 9 * 9 * 64 / CPF3;
  logic [$clog2(L3_IW)-1:0] i3_ra;
  act_t                     i3_rd [CPF3];

  fmap_buffer #(.N_ELEMS(9*9*64), .WR_LANES(KPF2), .RD_LANES(CPF3)) u_b2 (
    .clk, .we(o2_we), .waddr(o2_wa), .wdata(o2_wd), .raddr(i3_ra), .rdata(i3_rd));

  // ---------------- layer 3 ----------------
  localparam int unsigned L3_OW = 7 * 7 * 64 / KPF3;
  logic                     o3_we;
  logic [$clog2(L3_OW)-1:0] o3_wa;
  act_t                     o3_wd [KPF3];

  conv_layer #(.IN_W(9), .IN_H(9), .IN_C(64), .K(3), .S(1), .OUT_C(64),
               .CPF(CPF3), .KPF(KPF3), .RELU(1'b1)) u_l3 (
    .clk, .rst_n, .start(st3), .busy(bz3), .done(dn3),
    .in_rows(r2), .out_rows(r3),
    .in_raddr(i3_ra), .in_rdata(i3_rd),
    .w_we(we3), .w_addr(wo3[$clog2(NW_L3)-1:0]), .w_data(w_data),
    .out_we(o3_we), .out_waddr(o3_wa), .out_wdata(o3_wd));

  // ---------------- buffer 3 ----------------
  localparam int unsigned L4_IW = 7 * 7 * 64 / CPF4;
  logic [$clog2(L4_IW)-1:0] i4_ra;
  act_t                     i4_rd [CPF4];

  fmap_buffer #(.N_ELEMS(7*7*64), .WR_LANES(KPF3), .RD_LANES(CPF4)) u_b3 (
    .clk, .we(o3_we), .waddr(o3_wa), .wdata(o3_wd), .raddr(i4_ra), .rdata(i4_rd));

  // ---------------- layer 4: inner product ----------------
  logic       o4_we;
  logic [4:0] o4_wa;
  act_t       o4_wd [1];

  conv_layer #(.IN_W(7), .IN_H(7), .IN_C(64), .K(7), .S(1), .OUT_C(N_ACTIONS),
               .CPF(CPF4), .KPF(1), .RELU(1'b0)) u_l4 (
    .clk, .rst_n, .start(st4), .busy(bz4), .done(dn4),
    .in_rows(r3), .out_rows(r4),
    .in_raddr(i4_ra), .in_rdata(i4_rd),
    .w_we(we4), .w_addr(wo4[$clog2(NW_L4)-1:0]), .w_data(w_data),
    .out_we(o4_we), .out_waddr(o4_wa), .out_wdata(o4_wd));

  // ---------------- sequencing ----------------
  // all layers start together; each waits, row by row, for its input rows
  assign st1 = start && !busy;
  assign st2 = st1;
  assign st3 = st1;
  assign st4 = st1;
  assign done = dn4;
  assign busy = bz1 | bz2 | bz3 | bz4;

  assign q_valid = o4_we;
  assign q_idx   = o4_wa;
  assign q_value = o4_wd[0];

endmodule
