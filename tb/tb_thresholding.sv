// tb_thresholding: random accumulations and thresholds into a binary and a
// ternary thresholding unit; the expected activation is the number of
// thresholds exceeded (minus 1 for the ternary case), computed here. Also
// checks that +TH_MAX / -TH_MAX thresholds force the output regardless of
// the accumulation, which is what stuck-at injection relies on.
module tb_thresholding;
  int checks = 0;
  int failures = 0;

  localparam int ACC_W = 10;
  localparam int TH_W  = 11;
  localparam int TH_MAX = (1 << (TH_W - 1)) - 1;

  logic signed [ACC_W-1:0] val;
  logic [TH_W-1:0]         th1;
  logic [2*TH_W-1:0]       th2;
  logic [0:0]              act1;
  logic [1:0]              act2;

  thresholding #(.ABITS(1), .ACC_W(ACC_W), .TH_W(TH_W), .NUM_TH(1)) dut1 (.val(val), .th(th1), .act(act1));
  thresholding #(.ABITS(2), .ACC_W(ACC_W), .TH_W(TH_W), .NUM_TH(2)) dut2 (.val(val), .th(th2), .act(act2));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int t = 0; t < 400; t++) begin
      int v, a, b, c, cnt;
      v = int'($urandom_range(0, 1023)) - 512;
      a = int'($urandom_range(0, 400)) - 200;
      b = int'($urandom_range(0, 400)) - 200;
      c = int'($urandom_range(0, 400)) - 200;
      if (t % 50 == 0) begin a = v; b = v; c = v - 1; end  // equality edges
      val = ACC_W'(v); th1 = TH_W'(a); th2 = {TH_W'(c), TH_W'(b)};
      #1;
      check(act1 == ((v > a) ? 1'b1 : 1'b0), $sformatf("binary v=%0d th=%0d", v, a));
      cnt = int'(v > b) + int'(v > c);
      check(act2 == 2'(cnt - 1), $sformatf("ternary v=%0d th=%0d,%0d got %b", v, b, c, act2));
    end
    // forced values
    for (int t = 0; t < 20; t++) begin
      val = ACC_W'($urandom);
      th1 = TH_W'(TH_MAX);  #1; check(act1 == 1'b0, "binary forced to -1");
      th1 = TH_W'(-TH_MAX); #1; check(act1 == 1'b1, "binary forced to +1");
      th2 = {TH_W'(TH_MAX), TH_W'(TH_MAX)};   #1; check(act2 == 2'b11, "ternary forced to -1");
      th2 = {TH_W'(TH_MAX), TH_W'(-TH_MAX)};  #1; check(act2 == 2'b00, "ternary forced to 0");
      th2 = {TH_W'(-TH_MAX), TH_W'(-TH_MAX)}; #1; check(act2 == 2'b01, "ternary forced to +1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
