// weight_ram: parameter block RAM of one network layer.
//
// Holds DEPTH words of LANES 16-bit weights. The layer engine reads one whole
// word (all CPF*KPF weights it multiplies in one cycle) per read; the host
// writes one weight at a time through the AXI register file, at element
// index waddr = word*LANES + lane. Writable parameters held in block RAM
// follow the paper; the element-wise write port is this design's choice.
//
// Timing: write takes effect at the clock edge; read data is registered and
// valid one cycle after raddr.
module weight_ram #(
  parameter int unsigned LANES  = 128,
  parameter int unsigned DEPTH  = 64,
  parameter int unsigned DATA_W = 16
) (
  input  logic                              clk,
  input  logic                              we,
  input  logic [$clog2(DEPTH*LANES)-1:0]    waddr,
  input  logic signed [DATA_W-1:0]          wdata,
  input  logic [$clog2(DEPTH)-1:0]          raddr,
  output logic signed [DATA_W-1:0]          rdata [LANES]
);

  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1;
  localparam int unsigned DW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic signed [DATA_W-1:0] mem [DEPTH][LANES];
  logic [DW-1:0] wword;
  logic [LW-1:0] wlane;

  always_comb begin
    wword = DW'(waddr / LANES);
    wlane = LW'(waddr % LANES);
  end

  always_ff @(posedge clk) begin
    if (we) mem[wword][wlane] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
