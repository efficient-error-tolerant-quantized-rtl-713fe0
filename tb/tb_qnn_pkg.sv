// tb_qnn_pkg: checks the helper functions of qnn_pkg against values worked
// out by hand: magnitudes, widths, threshold counts, the stuck-at threshold
// count for binary and ternary outputs, and the bitwise majority vote.
module tb_qnn_pkg;
  import qnn_pkg::*;

  int checks = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    check(val_mag(1) == 1, "val_mag(1)");
    check(val_mag(2) == 2, "val_mag(2)");
    check(val_mag(8) == 128, "val_mag(8)");
    // 27 products of +-1 and [-128,127]: |sum| <= 3456 needs 13 bits signed
    check(acc_width(27, 1, 8) == 13, "acc_width(27,1,8)");
    // 576 products of +-1: |sum| <= 576 needs 11 bits signed
    check(acc_width(576, 1, 1) == 11, "acc_width(576,1,1)");
    check(num_thresholds(1) == 1, "num_thresholds(1)");
    check(num_thresholds(2) == 2, "num_thresholds(2)");
    check(num_thresholds(4) == 14, "num_thresholds(4)");
    check(act_offset(1) == 0, "act_offset(1)");
    check(act_offset(2) == 1, "act_offset(2)");
    check(act_offset(4) == 7, "act_offset(4)");
    // binary: code 1 forces the single threshold low, code 0 keeps it high
    check(stuck_count(1, 32'd1) == 1, "stuck_count(1,1)");
    check(stuck_count(1, 32'd0) == 0, "stuck_count(1,0)");
    // ternary: 11 = -1 -> 0, 00 = 0 -> 1, 01 = +1 -> 2, unused 10 -> 0
    check(stuck_count(2, 32'b11) == 0, "stuck_count(2,-1)");
    check(stuck_count(2, 32'b00) == 1, "stuck_count(2,0)");
    check(stuck_count(2, 32'b01) == 2, "stuck_count(2,+1)");
    check(stuck_count(2, 32'b10) == 0, "stuck_count(2,-2)");
    // 4 bit: -7 -> 0, +7 -> 14, 0 -> 7
    check(stuck_count(4, 32'h9) == 0, "stuck_count(4,-7)");
    check(stuck_count(4, 32'h7) == 14, "stuck_count(4,7)");
    check(stuck_count(4, 32'h0) == 7, "stuck_count(4,0)");
    check(majority3(32'b1100, 32'b1010, 32'b1001) == 32'b1000, "majority3 a");
    check(majority3(32'b0110, 32'b0110, 32'b1001) == 32'b0110, "majority3 b");
    check(INJ_PE != INJ_SLOT, "enum");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
