// tb_mvtu_pe: feeds one processing element (SIMD 3, 1-bit weights, 8-bit
// inputs, binary output, 27 inputs per dot product, so 9 words per fold)
// with random folds, including idle cycles between words, and checks the
// registered activation one cycle after the last word against a dot
// product and threshold comparison computed here. It also checks that the
// output holds between folds and that en low freezes the accumulator.
module tb_mvtu_pe;
  int checks = 0;
  int failures = 0;

  localparam int SIMD = 3, SF = 9, ACC_W = 13, TH_W = 14;

  logic clk = 0, rst_n = 0, en = 0, sf_first = 0, sf_last = 0;
  logic [SIMD-1:0]   w;
  logic [SIMD*8-1:0] x;
  logic [TH_W-1:0]   th;
  logic [0:0]        act;

  always #5 clk = ~clk;

  mvtu_pe #(.SIMD(SIMD), .WBITS(1), .IN_BITS(8), .ABITS(1), .MATRIX_W(27)) dut (
    .clk(clk), .rst_n(rst_n), .en(en), .sf_first(sf_first), .sf_last(sf_last),
    .w(w), .x(x), .th(th), .act(act));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    w = '0; x = '0; th = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(act == 1'b0, "reset value");
    for (int t = 0; t < 60; t++) begin
      int sum, thv;
      logic prev;
      sum = 0;
      thv = int'($urandom_range(0, 600)) - 300;
      for (int s = 0; s < SF; s++) begin
        // random idle cycle with garbage on the inputs
        if ($urandom_range(0, 3) == 0) begin
          en = 0; w = 3'($urandom); x = 24'($urandom);
          @(negedge clk);
        end
        w = 3'($urandom); x = 24'($urandom);
        for (int i = 0; i < SIMD; i++) sum += (w[i] ? 1 : -1) * int'($signed(x[i*8 +: 8]));
        en = 1; sf_first = (s == 0); sf_last = (s == SF - 1);
        th = (s == SF - 1) ? TH_W'(thv) : TH_W'($urandom);
        prev = act;
        @(negedge clk);
        if (s != SF - 1) check(act == prev, "act holds inside a fold");
      end
      en = 0; sf_first = 0; sf_last = 0;
      check(act == ((sum > thv) ? 1'b1 : 1'b0), $sformatf("fold %0d sum=%0d th=%0d act=%b", t, sum, thv, act));
      @(negedge clk);
      check(act == ((sum > thv) ? 1'b1 : 1'b0), "act holds after fold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
