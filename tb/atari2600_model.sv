// atari2600_model: behavioural stand-in for the Atari 2600 console core.
//
// Not a console. It only reproduces, cycle for cycle, the interface a real
// console core presents to the fitness evaluation module, so that the loop can
// be simulated end to end:
//  * a raster of HT x VT positions per frame, advanced only when ce is high;
//    the first 160 positions of the first 210 lines are visible and are
//    emitted as pixels (7-bit palette index, sof on the first);
//  * each pixel's colour comes from the cartridge ROM (byte read from rom_addr
//    with one cycle of latency) mixed with the joystick lines, and a 16x8
//    block near the top alternates between black and white on odd and even
//    frames, like a flickering sprite;
//  * frame_end is a registered pulse after the last raster position;
//  * a 128-byte RAM holds a BCD score at 0x10 (low) and 0x11, increased by 2
//    per frame while fire is pressed and by 1 otherwise, and a lives counter
//    at 0x20 that starts at LIVES and drops every LIFE_FRAMES frames, so the
//    game ends after LIVES*LIFE_FRAMES frames. ram_raddr/ram_rdata read it
//    with one cycle of latency.
// rst (held by the loop while idle) restarts the raster and the RAM.
module atari2600_model
  import fem_pkg::*;
#(
  parameter int unsigned HT          = 228,
  parameter int unsigned VT          = 262,
  parameter int unsigned LIVES       = 6,
  parameter int unsigned LIFE_FRAMES = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        ce,
  input  joy_t        joy,
  output logic [14:0] rom_addr,
  input  logic [7:0]  rom_data,
  output logic        pix_valid,
  output logic        pix_sof,
  output logic [6:0]  pix_color,
  output logic        frame_end,
  input  logic [6:0]  ram_raddr,
  output logic [7:0]  ram_rdata
);

  int unsigned hc, vc, frame;
  logic [7:0] ram [128];

  assign rom_addr = 15'((vc * 160 + hc + frame * 13) % 32768);

  function automatic logic [7:0] bcd_add(logic [7:0] b, int n, output bit carry);
    int v;
    v = int'(b[7:4]) * 10 + int'(b[3:0]) + n;
    carry = (v >= 100);
    v = v % 100;
    return {4'(v / 10), 4'(v % 10)};
  endfunction

  always @(posedge clk) begin
    ram_rdata <= ram[ram_raddr];
    pix_valid <= 1'b0;
    pix_sof   <= 1'b0;
    frame_end <= 1'b0;
    if (rst) begin
      hc <= 0; vc <= 0; frame <= 0;
      foreach (ram[i]) ram[i] <= 8'h00;
      ram[8'h20] <= 8'(LIVES);
    end else if (ce) begin
      if (hc < 160 && vc < 210) begin
        pix_valid <= 1'b1;
        pix_sof   <= (hc == 0 && vc == 0);
        if (vc >= 40 && vc < 48 && hc >= 72 && hc < 88)
          pix_color <= frame[0] ? 7'h0f : 7'h00;
        else
          pix_color <= rom_data[7:1] ^ {joy, 2'b00};
      end
      if (hc == HT - 1) begin
        hc <= 0;
        if (vc == VT - 1) begin
          bit c;
          vc <= 0;
          frame <= frame + 1;
          frame_end <= 1'b1;
          ram[8'h10] <= bcd_add(ram[8'h10], joy.fire ? 2 : 1, c);
          if (c) ram[8'h11] <= bcd_add(ram[8'h11], 1, c);
          if ((frame + 1) % LIFE_FRAMES == 0 && ram[8'h20] != 0) ram[8'h20] <= ram[8'h20] - 1;
        end else begin
          vc <= vc + 1;
        end
      end else begin
        hc <= hc + 1;
      end
    end
  end

endmodule
