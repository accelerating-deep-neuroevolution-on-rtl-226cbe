// game_status: score and end-of-game detection from the console's RAM.
//
// Every game keeps its score and its lives or game-over flag at its own
// locations in the console's 128-byte RAM. A descriptor table, indexed by the
// game identifier register, says where; after every console frame (sample)
// this block reads those bytes through the console's RAM read port and
// updates the score and the alive/dead status.
//
// Descriptor of game g: two 32-bit words at table index 2g and 2g+1.
//   word 0: [7:0] score byte 0 (least significant), [15:8] byte 1,
//           [23:16] byte 2 -- each {valid, ram address[6:0]};
//           [24] 1 = bytes are BCD (two decimal digits each), 0 = binary
//   word 1: [6:0] flag address, [15:8] mask, [23:16] value,
//           [24] enable: dead when (RAM[address] & mask) == value
// Score = b0 + b1*100 + b2*10000 for BCD, b0 + b1*256 + b2*65536 for binary.
//
// The paper states the mechanism (a game identifier tells the module where the
// status and score live in RAM). The per-game locations themselves are not
// given, so the table is a RAM the host fills; its format is this design's.
//
// Timing: sample starts a 5-cycle read sequence (4 reads, one-cycle read
// latency); score and dead update and `updated` pulses at its end. A sample
// arriving during a sequence is ignored. clear zeroes score and dead.
module game_status
  import fem_pkg::*;
#(
  parameter int unsigned N_GAMES = 64
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           clear,
  input  logic [$clog2(N_GAMES)-1:0]     game_id,
  input  logic                           desc_we,
  input  logic [$clog2(2*N_GAMES)-1:0]   desc_addr,
  input  logic [31:0]                    desc_wdata,
  input  logic                           sample,
  output logic [6:0]                     ram_raddr,
  input  logic [7:0]                     ram_rdata,
  output logic [31:0]                    score,
  output logic                           dead,
  output logic                           updated
);

  logic [31:0] desc [2*N_GAMES];
  always_ff @(posedge clk) if (desc_we) desc[desc_addr] <= desc_wdata;

  logic [31:0] d0, d1;
  assign d0 = desc[{game_id, 1'b0}];
  assign d1 = desc[{game_id, 1'b1}];

  typedef enum logic [2:0] {S_IDLE, S_RD0, S_RD1, S_RD2, S_RDF, S_DONE} state_e;
  state_e state;
  logic [7:0] b0, b1, b2;

  function automatic logic [31:0] byte_val(input logic [7:0] b, input logic bcd);
    return bcd ? 32'(b[7:4]) * 32'd10 + 32'(b[3:0]) : 32'(b);
  endfunction

  always_comb begin
    case (state)
      S_IDLE:  ram_raddr = d0[6:0];
      S_RD0:   ram_raddr = d0[14:8];
      S_RD1:   ram_raddr = d0[22:16];
      default: ram_raddr = d1[6:0];
    endcase
  end

  logic [31:0] score_c;
  always_comb begin
    score_c = (d0[7]  ? byte_val(b0, d0[24]) : 32'd0)
            + (d0[15] ? byte_val(b1, d0[24]) * (d0[24] ? 32'd100   : 32'd256)   : 32'd0)
            + (d0[23] ? byte_val(b2, d0[24]) * (d0[24] ? 32'd10000 : 32'd65536) : 32'd0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      b0 <= '0; b1 <= '0; b2 <= '0;
      score <= '0; dead <= 1'b0; updated <= 1'b0;
    end else begin
      updated <= 1'b0;
      if (clear) begin
        state <= S_IDLE;
        score <= '0;
        dead  <= 1'b0;
      end else begin
        case (state)
          S_IDLE: if (sample) state <= S_RD0;       // address of byte 0 presented
          S_RD0:  begin b0 <= ram_rdata; state <= S_RD1; end
          S_RD1:  begin b1 <= ram_rdata; state <= S_RD2; end
          S_RD2:  begin b2 <= ram_rdata; state <= S_RDF; end
          S_RDF:  begin
            score   <= score_c;
            dead    <= d1[24] && ((ram_rdata & d1[15:8]) == d1[23:16]);
            updated <= 1'b1;
            state   <= S_IDLE;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

endmodule
