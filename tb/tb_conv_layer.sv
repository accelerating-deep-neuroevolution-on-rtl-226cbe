// tb_conv_layer: the layer engine against an integer reference.
// Two engines: one at its default parameters (the network's first layer,
// 84x84x4 -> 20x20x32, CPF 4, KPF 32, ReLU) and one small layer with several
// input- and output-channel groups and no ReLU (9x9x8 -> 4x4x8, kernel 3,
// stride 2, CPF 4, KPF 2). Weights are written in random order through the
// element port; every output is compared with the reference, and the time
// from start to done is compared with the issue-cycle formula
// OUT_W*OUT_H*(OUT_C/KPF)*K*K*(IN_C/CPF) + 3.
module tb_conv_layer;
  import fem_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- engine A: defaults ----------------
  localparam int AIW = 84, AIC = 4, AK = 8, AS = 4, AOC = 32, ACPF = 4, AKPF = 32;
  localparam int AOW = 20;
  logic a_start, a_busy, a_done, a_we, a_owe;
  logic [$clog2(AIW*AIW*AIC/ACPF)-1:0] a_raddr;
  act_t a_rdata [ACPF];
  logic [$clog2(AK*AK*AIC*AOC)-1:0] a_waddr;
  act_t a_wdata;
  logic [$clog2(AOW*AOW*AOC/AKPF)-1:0] a_oaddr;
  act_t a_odata [AKPF];

  logic [4:0] a_orows;
  conv_layer dut_a (.clk, .rst_n, .start(a_start), .busy(a_busy), .done(a_done),
    .in_rows(7'(AIW)), .out_rows(a_orows),
    .in_raddr(a_raddr), .in_rdata(a_rdata), .w_we(a_we), .w_addr(a_waddr), .w_data(a_wdata),
    .out_we(a_owe), .out_waddr(a_oaddr), .out_wdata(a_odata));

  // ---------------- engine B: small, several groups ----------------
  localparam int BIW = 9, BIC = 8, BK = 3, BS = 2, BOC = 8, BCPF = 4, BKPF = 2;
  localparam int BOW = 4;
  logic [3:0] b_irows;
  logic [2:0] b_orows;
  logic b_start, b_busy, b_done, b_we, b_owe;
  logic [$clog2(BIW*BIW*BIC/BCPF)-1:0] b_raddr;
  act_t b_rdata [BCPF];
  logic [$clog2(BK*BK*BIC*BOC)-1:0] b_waddr;
  act_t b_wdata;
  logic [$clog2(BOW*BOW*BOC/BKPF)-1:0] b_oaddr;
  act_t b_odata [BKPF];

  conv_layer #(.IN_W(BIW), .IN_H(BIW), .IN_C(BIC), .K(BK), .S(BS), .OUT_C(BOC),
               .CPF(BCPF), .KPF(BKPF), .RELU(1'b0)) dut_b (
    .clk, .rst_n, .start(b_start), .busy(b_busy), .done(b_done),
    .in_rows(b_irows), .out_rows(b_orows),
    .in_raddr(b_raddr), .in_rdata(b_rdata), .w_we(b_we), .w_addr(b_waddr), .w_data(b_wdata),
    .out_we(b_owe), .out_waddr(b_oaddr), .out_wdata(b_odata));

  shortint a_act[], a_wt[], a_res[];
  shortint a_got [AOW*AOW*AOC];
  shortint a_actf [AIW*AIW*AIC];
  shortint b_act[], b_wt[], b_res[];
  shortint b_got [BOW*BOW*BOC];
  shortint b_actf [BIW*BIW*BIC];

  // input memories (one cycle read latency)
  always @(posedge clk) begin
    for (int c = 0; c < ACPF; c++) a_rdata[c] <= a_actf[int'(a_raddr) * ACPF + c];
    for (int c = 0; c < BCPF; c++) b_rdata[c] <= b_actf[int'(b_raddr) * BCPF + c];
  end
  always @(posedge clk) begin
    if (a_owe) for (int k = 0; k < AKPF; k++) a_got[int'(a_oaddr) * AKPF + k] = a_odata[k];
    if (b_owe) for (int k = 0; k < BKPF; k++) b_got[int'(b_oaddr) * BKPF + k] = b_odata[k];
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  // engine B, second pass: input rows become available one at a time; no
  // issued read may touch a row that is not yet complete
  int b_stalls = 0, b_early = 0;
  always @(posedge clk) if (rst_n && dut_b.run) begin
    if (!dut_b.adv) b_stalls++;
    else if (int'(b_raddr) / (BIW * BIC / BCPF) >= int'(b_irows)) b_early++;
  end

  task automatic expect_rows(string nm, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s out_rows %0d expected %0d", nm, got, exp); end
  endtask

  task automatic compare(string nm, input shortint got[], ref shortint res[]);
    for (int i = 0; i < res.size(); i++) begin
      checks++;
      if (got[i] != res[i]) begin
        failures++;
        if (failures < 10) $display("%s out %0d: %0d expected %0d", nm, i, got[i], res[i]);
      end
    end
  endtask

  initial begin
    int t0, na, nb, nz;
    a_start = 0; b_start = 0; b_irows = 4'(BIW); a_we = 0; b_we = 0; a_waddr = '0; b_waddr = '0;
    a_wdata = '0; b_wdata = '0;
    a_act = new[AIW * AIW * AIC]; a_wt = new[AK * AK * AIC * AOC];
    b_act = new[BIW * BIW * BIC]; b_wt = new[BK * BK * BIC * BOC];
    foreach (a_act[i]) a_act[i] = shortint'($urandom_range(64));        // 0..1.0
    foreach (a_wt[i])  a_wt[i]  = shortint'($signed($urandom_range(1200)) - 600);
    foreach (b_act[i]) b_act[i] = shortint'($signed($urandom_range(4000)) - 2000);
    foreach (b_wt[i])  b_wt[i]  = shortint'($signed($urandom_range(16000)) - 8000);
    foreach (a_actf[i]) a_actf[i] = a_act[i];
    foreach (b_actf[i]) b_actf[i] = b_act[i];
    ref_conv(a_act, a_wt, a_res, AIW, AIW, AIC, AK, AS, AOC, 1'b1);
    ref_conv(b_act, b_wt, b_res, BIW, BIW, BIC, BK, BS, BOC, 1'b0);
    nz = 0;
    foreach (a_res[i]) if (a_res[i] == 0) nz++;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights, in natural order for A, reversed for B
    for (int o = 0; o < AOC; o++) for (int ky = 0; ky < AK; ky++)
      for (int kx = 0; kx < AK; kx++) for (int i = 0; i < AIC; i++) begin
        a_we <= 1;
        a_waddr <= $bits(a_waddr)'(wt_index(o, ky, kx, i, AK, AIC, ACPF, AKPF));
        a_wdata <= a_wt[((o * AK + ky) * AK + kx) * AIC + i];
        @(posedge clk);
      end
    a_we <= 0;
    for (int o = BOC - 1; o >= 0; o--) for (int ky = 0; ky < BK; ky++)
      for (int kx = 0; kx < BK; kx++) for (int i = BIC - 1; i >= 0; i--) begin
        b_we <= 1;
        b_waddr <= $bits(b_waddr)'(wt_index(o, ky, kx, i, BK, BIC, BCPF, BKPF));
        b_wdata <= b_wt[((o * BK + ky) * BK + kx) * BIC + i];
        @(posedge clk);
      end
    b_we <= 0;
    @(posedge clk);
    // engine B
    b_start <= 1; @(posedge clk); b_start <= 0; t0 = cyc;
    while (!b_done) @(posedge clk);
    nb = cyc - t0;
    @(posedge clk);
    compare("B", b_got, b_res);
    checks++;
    if (nb != BOW * BOW * (BOC / BKPF) * BK * BK * (BIC / BCPF) + 3) begin
      failures++; $display("B took %0d cycles", nb);
    end
    // engine A
    a_start <= 1; @(posedge clk); a_start <= 0; t0 = cyc;
    while (!a_done) @(posedge clk);
    na = cyc - t0;
    @(posedge clk);
    compare("A", a_got, a_res);
    checks++;
    if (na != AOW * AOW * (AOC / AKPF) * AK * AK * (AIC / ACPF) + 3) begin
      failures++; $display("A took %0d cycles", na);
    end
    expect_rows("A", a_orows, AOW);
    expect_rows("B", b_orows, BOW);
    // engine B again, its input arriving row by row (one row per 40 cycles)
    b_got = '{default: 0};
    b_irows <= 0;
    b_start <= 1; @(posedge clk); b_start <= 0;
    fork
      begin
        for (int r = 1; r <= BIW; r++) begin repeat (40) @(posedge clk); b_irows <= 4'(r); end
      end
      begin
        while (!b_done) @(posedge clk);
      end
    join
    @(posedge clk);
    compare("B rows", b_got, b_res);
    expect_rows("B rows", b_orows, BOW);
    checks += 2;
    if (b_stalls == 0) begin failures++; $display("no stall while waiting for rows"); end
    if (b_early != 0) begin failures++; $display("%0d reads of incomplete rows", b_early); end
    $display("B row by row: %0d stall cycles", b_stalls);
    $display("layer A: %0d cycles, %0d of %0d outputs clamped by ReLU", na, nz, a_res.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
