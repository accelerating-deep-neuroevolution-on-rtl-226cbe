// fem_pkg: types and constants shared by the fitness evaluation module.
//
// The fitness evaluation module closes the loop Atari 2600 console ->
// image pre-processing -> neural network -> action selection -> console
// inside one FPGA. This package holds the sizes of that loop (frame and
// network dimensions, the 16-bit fixed-point format), the pixel stream
// structs passed between the pre-processing stages, the joystick bundle and
// the 18-action table, and the AXI register map.
//
// Frame sizes, the network shape and the number format (16 bits, weights with
// 13 fractional bits, activations with 6) are the paper's. The stream
// structs, the action numbering (that of the Arcade Learning Environment)
// and the register map are this design's own choices.
package fem_pkg;

  // Console picture and network input
  localparam int unsigned FRAME_W = 160;
  localparam int unsigned FRAME_H = 210;
  localparam int unsigned NET_W   = 84;
  localparam int unsigned NET_H   = 84;
  localparam int unsigned STACK   = 4;     // frames per network input / per action

  // Fixed-point format of the network
  localparam int unsigned DATA_W  = 16;
  localparam int unsigned W_RADIX = 13;    // fractional bits of the weights
  localparam int unsigned A_RADIX = 6;     // fractional bits of the activations

  localparam int unsigned N_ACTIONS = 18;

  typedef logic signed [DATA_W-1:0] act_t;

  // Pixel stream with a palette index (console output)
  typedef struct packed {
    logic       valid;
    logic       sof;     // first pixel of a frame
    logic [6:0] color;   // palette index: hue[3:0], luminance[2:0]
  } pix_color_t;

  // Pixel stream with an 8-bit luminance
  typedef struct packed {
    logic       valid;
    logic       sof;
    logic [7:0] luma;
  } pix_luma_t;

  // Joystick lines driven into the console (active high)
  typedef struct packed {
    logic up;
    logic down;
    logic left;
    logic right;
    logic fire;
  } joy_t;

  // Arcade Learning Environment action set
  typedef enum logic [4:0] {
    A_NOOP, A_FIRE, A_UP, A_RIGHT, A_LEFT, A_DOWN,
    A_UPRIGHT, A_UPLEFT, A_DOWNRIGHT, A_DOWNLEFT,
    A_UPFIRE, A_RIGHTFIRE, A_LEFTFIRE, A_DOWNFIRE,
    A_UPRIGHTFIRE, A_UPLEFTFIRE, A_DOWNRIGHTFIRE, A_DOWNLEFTFIRE
  } action_e;

  function automatic joy_t action_to_joy(input logic [4:0] a);
    joy_t j;
    j = '0;
    case (a)
      5'd1:  j.fire = 1'b1;
      5'd2:  j.up = 1'b1;
      5'd3:  j.right = 1'b1;
      5'd4:  j.left = 1'b1;
      5'd5:  j.down = 1'b1;
      5'd6:  begin j.up = 1'b1;   j.right = 1'b1; end
      5'd7:  begin j.up = 1'b1;   j.left = 1'b1;  end
      5'd8:  begin j.down = 1'b1; j.right = 1'b1; end
      5'd9:  begin j.down = 1'b1; j.left = 1'b1;  end
      5'd10: begin j.up = 1'b1;   j.fire = 1'b1;  end
      5'd11: begin j.right = 1'b1; j.fire = 1'b1; end
      5'd12: begin j.left = 1'b1; j.fire = 1'b1;  end
      5'd13: begin j.down = 1'b1; j.fire = 1'b1;  end
      5'd14: begin j.up = 1'b1;   j.right = 1'b1; j.fire = 1'b1; end
      5'd15: begin j.up = 1'b1;   j.left = 1'b1;  j.fire = 1'b1; end
      5'd16: begin j.down = 1'b1; j.right = 1'b1; j.fire = 1'b1; end
      5'd17: begin j.down = 1'b1; j.left = 1'b1;  j.fire = 1'b1; end
      default: j = '0;
    endcase
    return j;
  endfunction

  // Number of weights per layer (no biases) and their offsets in the flat
  // weight index space written through AXI.
  localparam int unsigned NW_L1 = 8*8*4*32;     //  8,192
  localparam int unsigned NW_L2 = 4*4*32*64;    // 32,768
  localparam int unsigned NW_L3 = 3*3*64*64;    // 36,864
  localparam int unsigned NW_L4 = 7*7*64*18;    // 56,448
  localparam int unsigned WBASE_L2 = NW_L1;
  localparam int unsigned WBASE_L3 = WBASE_L2 + NW_L2;
  localparam int unsigned WBASE_L4 = WBASE_L3 + NW_L3;
  localparam int unsigned NW_TOTAL = WBASE_L4 + NW_L4;  // 134,272

  // AXI4-Lite register map (byte addresses, 24-bit address space)
  localparam logic [23:0] REG_CMD       = 24'h00_0000;  // W: bit0 reset, bit1 start, bit2 stop
  localparam logic [23:0] REG_GAME_ID   = 24'h00_0004;  // R/W
  localparam logic [23:0] REG_STATUS    = 24'h00_0008;  // R: bit0 alive, bit1 dead, bit2 running
  localparam logic [23:0] REG_SCORE     = 24'h00_000C;  // R
  localparam logic [23:0] REG_FRAMES    = 24'h00_0010;  // R
  localparam logic [23:0] REG_CLOCKS_LO = 24'h00_0014;  // R
  localparam logic [23:0] REG_CLOCKS_HI = 24'h00_0018;  // R
  localparam logic [23:0] REG_ACTION    = 24'h00_001C;  // R: last selected action
  localparam logic [23:0] DESC_BASE     = 24'h00_1000;  // W: 64 games x 2 words
  localparam logic [23:0] ROM_BASE      = 24'h01_0000;  // W: 32 KB game ROM
  localparam logic [23:0] WEIGHT_BASE   = 24'h10_0000;  // W: one weight per word

  localparam logic [2:0] CMD_RESET = 3'b001;
  localparam logic [2:0] CMD_START = 3'b010;
  localparam logic [2:0] CMD_STOP  = 3'b100;

endpackage
