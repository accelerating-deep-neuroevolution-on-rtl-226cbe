// tb_weight_ram: element-wise writes, word-wide reads.
// Fills an 8-lane x 16-word RAM one element at a time in random order and
// reads every word back, checking each lane and the one-cycle read latency.
module tb_weight_ram;
  localparam int L = 8, D = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we;
  logic [$clog2(D*L)-1:0] waddr;
  logic signed [15:0] wdata;
  logic [$clog2(D)-1:0] raddr;
  logic signed [15:0] rdata [L];
  shortint model [D*L];

  weight_ram #(.LANES(L), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [D*L];
    we = 0; waddr = '0; wdata = '0; raddr = '0;
    foreach (order[i]) order[i] = i;
    order.shuffle();
    @(posedge clk);
    foreach (order[i]) begin
      model[order[i]] = shortint'($urandom);
      we <= 1; waddr <= $clog2(D*L)'(order[i]); wdata <= model[order[i]];
      @(posedge clk);
    end
    we <= 0;
    for (int w = 0; w < D; w++) begin
      raddr <= $clog2(D)'(w);
      @(posedge clk); #1;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (rdata[l] != model[w * L + l]) begin failures++; $display("word %0d lane %0d", w, l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
