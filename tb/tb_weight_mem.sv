// tb_weight_mem: fills a small weight store (4 PEs, 3 folds, 5 words of
// 6 bits) with random words, then reads every (fold, word) pair and checks
// that PE p returns the word written to slot fold*4 + p. Finally rewrites
// single entries and checks that only they change.
module tb_weight_mem;
  int checks = 0;
  int failures = 0;

  localparam int PE = 4, NF = 3, SF = 5, WW = 6;

  logic clk = 0, we = 0;
  logic [3:0] wslot; logic [2:0] wsf; logic [WW-1:0] wdata;
  logic [1:0] rnf;   logic [2:0] rsf; logic [PE*WW-1:0] rdata;
  logic [WW-1:0] model [PE*NF][SF];

  always #5 clk = ~clk;

  weight_mem #(.PE(PE), .NF(NF), .SF(SF), .WORD_W(WW)) dut (
    .clk(clk), .we(we), .wslot(wslot), .wsf(wsf), .wdata(wdata),
    .rnf(rnf), .rsf(rsf), .rdata(rdata));

  task automatic write(input int s, input int f, input logic [WW-1:0] d);
    @(negedge clk); we = 1; wslot = 4'(s); wsf = 3'(f); wdata = d;
    @(negedge clk); we = 0;
    model[s][f] = d;
  endtask

  task automatic read_all();
    for (int n = 0; n < NF; n++)
      for (int f = 0; f < SF; f++) begin
        rnf = 2'(n); rsf = 3'(f); #1;
        for (int p = 0; p < PE; p++) begin
          checks++;
          if (rdata[p*WW +: WW] != model[n*PE + p][f]) begin
            failures++; $display("FAIL nf=%0d sf=%0d pe=%0d", n, f, p);
          end
        end
      end
  endtask

  initial begin
    for (int s = 0; s < PE*NF; s++)
      for (int f = 0; f < SF; f++) write(s, f, WW'($urandom));
    read_all();
    for (int t = 0; t < 10; t++) write(int'($urandom_range(0, PE*NF-1)), int'($urandom_range(0, SF-1)), WW'($urandom));
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
