// conv_layer: one layer of the network, CPF x KPF multiply-accumulates per cycle.
//
// Computes a convolution without padding and without bias,
//   out[oy][ox][oc] = f( sum_{ky,kx,ic} w[oc][ky][kx][ic] * in[oy*S+ky][ox*S+kx][ic] ),
// with f = ReLU when RELU is set. An inner-product layer is the special case
// K = IN_W = IN_H, S = 1 (one output position). As in the paper's network
// generator, parallelism is set per layer by two factors: CPF input channels
// and KPF output channels are processed in parallel, so each cycle one word
// of CPF activations and one word of CPF*KPF weights are read and KPF partial
// sums of CPF products each are added into KPF accumulators.
//
// Loop order, innermost first: input-channel group cg, kernel column kx,
// kernel row ky, output-channel group kg, output column ox, output row oy.
// Feature maps are stored height-width-channel, so the input word address is
// ((oy*S+ky)*IN_W + ox*S+kx)*(IN_C/CPF) + cg and the output word address is
// (oy*OUT_W+ox)*(OUT_C/KPF) + kg. The weight word for step
// (kg, ky, kx, cg) is ((kg*K+ky)*K+kx)*(IN_C/CPF) + cg, lane kl*CPF+cl holding
// the weight of output channel kg*KPF+kl and input channel cg*CPF+cl.
//
// Number format (paper): 16-bit weights with W_RADIX = 13 fractional bits,
// 16-bit activations with A_RADIX = 6. A product has 19 fractional bits; the
// sum is shifted right by W_RADIX (arithmetic, i.e. truncated) and saturated
// to 16 bits; ReLU then clamps at zero. Truncation, saturation and the
// row-level schedule are this design's choices.
//
// Row pipelining: in_rows tells how many input rows are complete (the
// producing layer's out_rows). A step whose input row oy*S+ky is not yet
// complete stalls the counters (a bubble enters the pipeline), so a layer can
// start together with the layer that feeds it and follow it row by row.
// out_rows counts this layer's completed output rows; it is cleared by start
// and steps when the last word of a row is written. Tie in_rows to IN_H when
// the whole input is present. The row-level overlap is in the spirit of the
// paper's layer-pipelined generator; the mechanism is this design's.
//
// Interface: start (pulse) begins a pass; in_raddr/in_rdata is a read port
// with one cycle of latency; w_we/w_addr/w_data write the layer's weights
// (element index, see weight_ram); out_we/out_waddr/out_wdata write KPF
// output channels. done pulses together with the last output write.
// Timing without stalls: OUT_W*OUT_H*(OUT_C/KPF)*K*K*(IN_C/CPF) cycles of
// issue, plus a 3-cycle pipeline; start is ignored while busy.
module conv_layer
  import fem_pkg::*;
#(
  parameter int unsigned IN_W    = 84,
  parameter int unsigned IN_H    = 84,
  parameter int unsigned IN_C    = 4,
  parameter int unsigned K       = 8,
  parameter int unsigned S       = 4,
  parameter int unsigned OUT_C   = 32,
  parameter int unsigned CPF     = 4,
  parameter int unsigned KPF     = 32,
  parameter bit          RELU    = 1'b1,
  parameter int unsigned W_RADIX = fem_pkg::W_RADIX,
  parameter int unsigned ACC_W   = 48,
  // derived
  parameter int unsigned OUT_W   = (IN_W - K) / S + 1,
  parameter int unsigned OUT_H   = (IN_H - K) / S + 1,
  parameter int unsigned NCG     = IN_C / CPF,
  parameter int unsigned NKG     = OUT_C / KPF,
  parameter int unsigned LANES   = CPF * KPF,
  parameter int unsigned WDEPTH  = NKG * K * K * NCG,
  parameter int unsigned IN_WORDS  = IN_W * IN_H * NCG,
  parameter int unsigned OUT_WORDS = OUT_W * OUT_H * NKG
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  output logic                               busy,
  input  logic [$clog2(IN_H+1)-1:0]          in_rows,
  output logic [$clog2(OUT_H+1)-1:0]         out_rows,
  output logic                               done,
  output logic [$clog2(IN_WORDS)-1:0]        in_raddr,
  input  act_t                               in_rdata [CPF],
  input  logic                               w_we,
  input  logic [$clog2(WDEPTH*LANES)-1:0]    w_addr,
  input  act_t                               w_data,
  output logic                               out_we,
  output logic [$clog2(OUT_WORDS)-1:0]       out_waddr,
  output act_t                               out_wdata [KPF]
);

  localparam int unsigned PSUM_W = 2 * DATA_W + $clog2(CPF) + 1;
  localparam int unsigned IAW = $clog2(IN_WORDS);
  localparam int unsigned OAW = $clog2(OUT_WORDS);
  localparam int unsigned WAW = $clog2(WDEPTH);

  // ---------------- weights ----------------
  act_t           wrd [LANES];
  logic [WAW-1:0] wa;

  weight_ram #(.LANES(LANES), .DEPTH(WDEPTH), .DATA_W(DATA_W)) u_wram (
    .clk   (clk),
    .we    (w_we),
    .waddr (w_addr),
    .wdata (w_data),
    .raddr (wa),
    .rdata (wrd)
  );

  // ---------------- stage 0: loop counters ----------------
  logic run;
  logic [$clog2(NCG+1)-1:0]   cg;
  logic [$clog2(K+1)-1:0]     kx, ky;
  logic [$clog2(NKG+1)-1:0]   kg;
  logic [$clog2(OUT_W+1)-1:0] ox;
  logic [$clog2(OUT_H+1)-1:0] oy;

  logic s0_first, s0_last, s0_final, s0_rowend, stall, adv;
  logic [OAW-1:0] s0_oaddr;

  always_comb begin
    s0_first = (cg == 0) && (kx == 0) && (ky == 0);
    s0_last  = (int'(cg) == NCG - 1) && (int'(kx) == K - 1) && (int'(ky) == K - 1);
    s0_rowend = s0_last && (int'(kg) == NKG - 1) && (int'(ox) == OUT_W - 1);
    s0_final = s0_rowend && (int'(oy) == OUT_H - 1);
    // the input row this step reads must already be complete
    stall    = (int'(oy) * S + int'(ky)) >= int'(in_rows);
    adv      = run && !stall;
    in_raddr = IAW'(((int'(oy) * S + int'(ky)) * IN_W + int'(ox) * S + int'(kx)) * NCG + int'(cg));
    s0_oaddr = OAW'((int'(oy) * OUT_W + int'(ox)) * NKG + int'(kg));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      cg <= '0; kx <= '0; ky <= '0; kg <= '0; ox <= '0; oy <= '0;
      wa <= '0;
    end else if (!run) begin
      if (start) begin
        run <= 1'b1;
        cg <= '0; kx <= '0; ky <= '0; kg <= '0; ox <= '0; oy <= '0;
        wa <= '0;
      end
    end else if (adv) begin
      wa <= (int'(wa) == WDEPTH - 1) ? '0 : wa + 1'b1;
      if (int'(cg) != NCG - 1) cg <= cg + 1'b1;
      else begin
        cg <= '0;
        if (int'(kx) != K - 1) kx <= kx + 1'b1;
        else begin
          kx <= '0;
          if (int'(ky) != K - 1) ky <= ky + 1'b1;
          else begin
            ky <= '0;
            if (int'(kg) != NKG - 1) kg <= kg + 1'b1;
            else begin
              kg <= '0;
              if (int'(ox) != OUT_W - 1) ox <= ox + 1'b1;
              else begin
                ox <= '0;
                if (int'(oy) != OUT_H - 1) oy <= oy + 1'b1;
                else begin
                  oy  <= '0;
                  run <= 1'b0;
                end
              end
            end
          end
        end
      end
    end
  end

  // ---------------- stage 1: memory data arrives ----------------
  logic s1_v, s1_first, s1_last, s1_final, s1_rowend;
  logic [OAW-1:0] s1_oaddr;
  // ---------------- stage 2: partial sums ----------------
  logic s2_v, s2_first, s2_last, s2_final, s2_rowend, out_rowend;
  logic [OAW-1:0] s2_oaddr;
  logic signed [PSUM_W-1:0] psum [KPF];
  logic signed [PSUM_W-1:0] psum_c [KPF];
  logic signed [ACC_W-1:0]  acc [KPF];
  logic signed [ACC_W-1:0]  acc_c [KPF];

  always_comb begin
    for (int kl = 0; kl < KPF; kl++) begin
      psum_c[kl] = '0;
      for (int cl = 0; cl < CPF; cl++)
        psum_c[kl] += PSUM_W'(wrd[kl*CPF + cl] * in_rdata[cl]);
    end
  end

  always_comb
    for (int kl = 0; kl < KPF; kl++)
      acc_c[kl] = (s2_first ? ACC_W'(0) : acc[kl]) + ACC_W'(psum[kl]);

  function automatic act_t requant(input logic signed [ACC_W-1:0] a);
    logic signed [ACC_W-1:0] sh;
    act_t r;
    sh = a >>> W_RADIX;
    if (sh > ACC_W'(32767))       r = 16'sh7fff;
    else if (sh < -ACC_W'(32768)) r = 16'sh8000;
    else                          r = act_t'(sh);
    if (RELU && r < 0) r = '0;
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {s1_v, s1_first, s1_last, s1_final, s1_rowend} <= '0;
      {s2_v, s2_first, s2_last, s2_final, s2_rowend} <= '0;
      out_rowend <= 1'b0; out_rows <= '0;
      s1_oaddr <= '0; s2_oaddr <= '0;
      out_we <= 1'b0; out_waddr <= '0; done <= 1'b0;
      for (int kl = 0; kl < KPF; kl++) begin
        psum[kl] <= '0; acc[kl] <= '0; out_wdata[kl] <= '0;
      end
    end else begin
      s1_v <= adv; s1_first <= s0_first; s1_last <= s0_last; s1_final <= s0_final;
      s1_rowend <= s0_rowend; s2_rowend <= s1_rowend;
      if (start && !run) out_rows <= '0;
      else if (out_we && out_rowend) out_rows <= out_rows + 1'b1;
      s1_oaddr <= s0_oaddr;
      s2_v <= s1_v; s2_first <= s1_first; s2_last <= s1_last; s2_final <= s1_final;
      s2_oaddr <= s1_oaddr;
      psum <= psum_c;
      out_we <= 1'b0;
      done   <= 1'b0;
      if (s2_v) begin
        acc <= acc_c;
        if (s2_last) begin
          out_we    <= 1'b1;
          out_waddr <= s2_oaddr;
          out_rowend <= s2_rowend;
          for (int kl = 0; kl < KPF; kl++) out_wdata[kl] <= requant(acc_c[kl]);
          done <= s2_final;
        end
      end
    end
  end

  assign busy = run | s1_v | s2_v | out_we;

endmodule
