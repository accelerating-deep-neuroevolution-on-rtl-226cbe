// rom_bram: the game cartridge memory of the console.
//
// Written by the host through AXI, 32 bits at a time with byte strobes (so
// a new game can be loaded without reconfiguring the FPGA), and read by the
// console one byte at a time. Host-loadable game ROM in block RAM follows the
// paper; the 32 KB size (enough for bank-switched cartridges) is this
// design's choice.
//
// Interface: we/waddr (32-bit word index)/wdata/wstrb; raddr (byte address),
// rdata valid one cycle later.
module rom_bram #(
  parameter int unsigned ROM_BYTES = 32768
) (
  input  logic                             clk,
  input  logic                             we,
  input  logic [$clog2(ROM_BYTES/4)-1:0]   waddr,
  input  logic [31:0]                      wdata,
  input  logic [3:0]                       wstrb,
  input  logic [$clog2(ROM_BYTES)-1:0]     raddr,
  output logic [7:0]                       rdata
);

  localparam int unsigned AW = $clog2(ROM_BYTES);

  logic [7:0] mem [ROM_BYTES/4][4];

  always_ff @(posedge clk) begin
    if (we)
      for (int b = 0; b < 4; b++)
        if (wstrb[b]) mem[waddr][b] <= wdata[8*b +: 8];
    rdata <= mem[raddr[AW-1:2]][raddr[1:0]];
  end

endmodule
