// tb_ann: the whole four-layer network at full size.
// Random weights (all 134,272, written through the flat weight port in
// shuffled order) and a random stacked input; the 18 outputs are compared
// with a layer-by-layer integer reference, the output order 0..17 is checked,
// and the duration of the pass is checked against the critical path of the
// row-by-row layer pipeline: all of layer 1 (25,600 issue cycles), then the
// last output row of layer 2 (9*16*16 = 2,304) and of layer 3
// (7*64/32*9*16 = 2,016), then the last input row of the first inner-product
// output (7*16 = 112) and the 17 remaining outputs (17*784 = 13,328): 43,360
// cycles. Pipeline latency adds a few cycles and the first kernel rows of a
// layer's last output row may overlap its producer's last row, so the pass
// must lie within 1% of that estimate (the layer-by-layer schedule would take
// 74,572).
module tb_ann;
  import fem_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic start, done, busy, w_we, q_valid;
  logic [$clog2(NET_W*NET_H)-1:0] raddr;
  act_t rdata [STACK];
  logic [$clog2(NW_TOTAL)-1:0] w_idx;
  act_t w_data, q_value;
  logic [4:0] q_idx;

  ann dut (.clk, .rst_n, .start, .done, .busy, .in_raddr(raddr), .in_rdata(rdata),
           .w_we, .w_idx, .w_data, .q_valid, .q_idx, .q_value);

  shortint inp [NET_W*NET_H*STACK];
  always @(posedge clk)
    for (int c = 0; c < STACK; c++) rdata[c] <= inp[int'(raddr) * STACK + c];

  shortint x0[], w1[], w2[], w3[], w4[], x1[], x2[], x3[], y[];
  int      widx [NW_TOTAL];
  shortint wval [NW_TOTAL];
  shortint got [N_ACTIONS];
  int      nq = 0;
  localparam int PASS_EST = 25600 + 2304 + 2016 + 112 + 13328;
  int      cyc = 0;

  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && q_valid) begin
    checks++;
    if (int'(q_idx) != nq) begin failures++; $display("output %0d has index %0d", nq, q_idx); end
    got[q_idx] = q_value;
    nq++;
  end

  // weights of layer with base b: fill flat index table
  task automatic place(ref shortint w[], input int base, input int oc, input int k,
                       input int ic, input int cpf, input int kpf);
    for (int o = 0; o < oc; o++) for (int ky = 0; ky < k; ky++)
      for (int kx = 0; kx < k; kx++) for (int i = 0; i < ic; i++) begin
        int n;
        n = ((o * k + ky) * k + kx) * ic + i;
        widx[base + n] = base + wt_index(o, ky, kx, i, k, ic, cpf, kpf);
        wval[base + n] = w[n];
      end
  endtask

  initial begin
    int t0, order [];
    start = 0; w_we = 0; w_idx = '0; w_data = '0;
    x0 = new[NET_W * NET_H * STACK];
    foreach (x0[i]) begin x0[i] = shortint'($urandom_range(63)); inp[i] = x0[i]; end
    w1 = new[NW_L1]; w2 = new[NW_L2]; w3 = new[NW_L3]; w4 = new[NW_L4];
    foreach (w1[i]) w1[i] = shortint'($signed($urandom_range(1600)) - 800);
    foreach (w2[i]) w2[i] = shortint'($signed($urandom_range(1600)) - 780);
    foreach (w3[i]) w3[i] = shortint'($signed($urandom_range(1600)) - 780);
    foreach (w4[i]) w4[i] = shortint'($signed($urandom_range(1600)) - 800);
    ref_conv(x0, w1, x1, 84, 84, 4, 8, 4, 32, 1'b1);
    ref_conv(x1, w2, x2, 20, 20, 32, 4, 2, 64, 1'b1);
    ref_conv(x2, w3, x3, 9, 9, 64, 3, 1, 64, 1'b1);
    ref_conv(x3, w4, y, 7, 7, 64, 7, 1, 18, 1'b0);
    place(w1, 0, 32, 8, 4, 4, 32);
    place(w2, WBASE_L2, 64, 4, 32, 32, 4);
    place(w3, WBASE_L3, 64, 3, 64, 4, 32);
    place(w4, WBASE_L4, 18, 7, 64, 4, 1);
    order = new[NW_TOTAL];
    foreach (order[i]) order[i] = i;
    order.shuffle();
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (order[i]) begin
      w_we <= 1; w_idx <= $bits(w_idx)'(widx[order[i]]); w_data <= wval[order[i]];
      @(posedge clk);
    end
    w_we <= 0;
    @(posedge clk);
    start <= 1; @(posedge clk); start <= 0; t0 = cyc;
    while (!done) @(posedge clk);
    $display("network pass: %0d cycles", cyc - t0);
    checks++;
    if (cyc - t0 < PASS_EST - PASS_EST / 100 || cyc - t0 > PASS_EST + PASS_EST / 100) begin
      failures++; $display("pass took %0d cycles, expected %0d within 1%%", cyc - t0, PASS_EST);
    end
    @(posedge clk);
    checks++;
    if (nq != 18) begin failures++; $display("%0d outputs", nq); end
    for (int a = 0; a < 18; a++) begin
      checks++;
      if (got[a] != y[a]) begin failures++; $display("output %0d: %0d expected %0d", a, got[a], y[a]); end
    end
    begin
      int nzero;
      nzero = 0;
      foreach (x3[i]) if (x3[i] != 0) nzero++;
      $display("layer-3 nonzero activations: %0d of %0d; outputs %0d %0d %0d", nzero, x3.size(), y[0], y[1], y[2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
