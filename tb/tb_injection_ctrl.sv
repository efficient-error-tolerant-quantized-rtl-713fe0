// tb_injection_ctrl: sends slot and PE injection commands to a ternary
// injector (4 PEs, 3 folds, 2 thresholds of 10 bits) and records every
// threshold write. For each command it checks the number of writes, the
// slots written (the slot itself, or pe, pe+4, pe+8 for a PE), every index,
// and the value: +TH_MAX or -TH_MAX so that the threshold count equals the
// requested value + 1 (-1 -> none low, 0 -> one low, +1 -> both low).
// It also checks cmd_ready is low while busy and the cycle count.
module tb_injection_ctrl;
  import qnn_pkg::*;
  int checks = 0;
  int failures = 0;

  localparam int PE = 4, NF = 3, TW = 10;
  localparam int TH_MAX = (1 << (TW - 1)) - 1;

  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, busy;
  inj_mode_e cmd_mode;
  logic [3:0] cmd_target; logic [1:0] cmd_value;
  logic th_we; logic [3:0] th_slot; logic [0:0] th_idx; logic [TW-1:0] th_data;

  always #5 clk = ~clk;

  injection_ctrl #(.PE(PE), .NF(NF), .ABITS(2), .TH_W(TW)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready),
    .cmd_mode(cmd_mode), .cmd_target(cmd_target), .cmd_value(cmd_value),
    .th_we(th_we), .th_slot(th_slot), .th_idx(th_idx), .th_data(th_data), .busy(busy));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input inj_mode_e m, input int tgt, input logic [1:0] v);
    int n, nlow, expect_n;
    bit seen [PE*NF][2];
    foreach (seen[a, b]) seen[a][b] = 0;
    @(negedge clk);
    check(cmd_ready, "ready when idle");
    cmd_valid = 1; cmd_mode = m; cmd_target = 4'(tgt); cmd_value = v;
    @(negedge clk);
    cmd_valid = 0;
    n = 0; nlow = 0;
    while (th_we) begin
      check(!cmd_ready && busy, "not ready while busy");
      if (m == INJ_SLOT) check(int'(th_slot) == tgt, "slot target");
      else               check(int'(th_slot) % PE == tgt, "slot on PE");
      seen[th_slot][th_idx] = 1;
      if ($signed(th_data) == -TH_MAX) nlow++;
      else check($signed(th_data) == TH_MAX, "value is +-TH_MAX");
      n++;
      @(negedge clk);
    end
    expect_n = (m == INJ_SLOT) ? 2 : 2 * NF;
    check(n == expect_n, $sformatf("write count %0d", n));
    // thresholds per slot driven low: -1 -> 0, 0 -> 1, +1 -> 2
    check(nlow == (expect_n / 2) * ((v == 2'b11) ? 0 : (v == 2'b00) ? 1 : 2), $sformatf("low count %0d for %b", nlow, v));
    if (m == INJ_SLOT) check(seen[tgt][0] && seen[tgt][1], "both indices");
    else for (int f = 0; f < NF; f++) check(seen[f*PE + tgt][0] && seen[f*PE + tgt][1], "all folds");
  endtask

  initial begin
    cmd_mode = INJ_SLOT; cmd_target = '0; cmd_value = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      logic [1:0] v;
      v = (t % 3 == 0) ? 2'b11 : (t % 3 == 1) ? 2'b00 : 2'b01;
      if (t % 2 == 0) run(INJ_SLOT, int'($urandom_range(0, PE*NF-1)), v);
      else            run(INJ_PE, int'($urandom_range(0, PE-1)), v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
