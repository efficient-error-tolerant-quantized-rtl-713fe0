// tb_threshold_mem: fills a small threshold store (4 PEs, 3 folds, 2
// thresholds of 9 bits) with random values and checks that a read of fold n
// returns, for PE p and threshold i, the value written to slot n*4 + p,
// index i; then overwrites single entries, as an injection would, and
// checks again.
module tb_threshold_mem;
  int checks = 0;
  int failures = 0;

  localparam int PE = 4, NF = 3, NT = 2, TW = 9;

  logic clk = 0, we = 0;
  logic [3:0] wslot; logic [0:0] widx; logic [TW-1:0] wdata;
  logic [1:0] rnf;   logic [PE*NT*TW-1:0] rdata;
  logic [TW-1:0] model [PE*NF][NT];

  always #5 clk = ~clk;

  threshold_mem #(.PE(PE), .NF(NF), .NUM_TH(NT), .TH_W(TW)) dut (
    .clk(clk), .we(we), .wslot(wslot), .widx(widx), .wdata(wdata),
    .rnf(rnf), .rdata(rdata));

  task automatic write(input int s, input int i, input logic [TW-1:0] d);
    @(negedge clk); we = 1; wslot = 4'(s); widx = 1'(i); wdata = d;
    @(negedge clk); we = 0;
    model[s][i] = d;
  endtask

  task automatic read_all();
    for (int n = 0; n < NF; n++) begin
      rnf = 2'(n); #1;
      for (int p = 0; p < PE; p++)
        for (int i = 0; i < NT; i++) begin
          checks++;
          if (rdata[(p*NT + i)*TW +: TW] != model[n*PE + p][i]) begin
            failures++; $display("FAIL nf=%0d pe=%0d i=%0d", n, p, i);
          end
        end
    end
  endtask

  initial begin
    for (int s = 0; s < PE*NF; s++)
      for (int i = 0; i < NT; i++) write(s, i, TW'($urandom));
    read_all();
    for (int t = 0; t < 10; t++) write(int'($urandom_range(0, PE*NF-1)), int'($urandom_range(0, NT-1)), TW'($urandom));
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
