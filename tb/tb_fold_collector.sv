// tb_fold_collector: pushes random folds (4 PEs x 2 bits, 3 folds) with
// random gaps and random back-pressure on the output, and checks that each
// vector carries fold f in slots f*4 .. f*4+3, that vectors come out in
// order, and that a full vector blocks further folds.
module tb_fold_collector;
  int checks = 0;
  int failures = 0;

  localparam int PE = 4, NF = 3, AB = 2, NV = 40;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [1:0] in_fold; logic [PE*AB-1:0] in_act; logic [NF*PE*AB-1:0] out_vec;
  logic [NF*PE*AB-1:0] sent [NV];
  int nblocked = 0;

  always #5 clk = ~clk;

  fold_collector #(.PE(PE), .NF(NF), .ABITS(AB)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready),
    .in_fold(in_fold), .in_act(in_act), .out_valid(out_valid),
    .out_ready(out_ready), .out_vec(out_vec));

  initial begin
    foreach (sent[v]) sent[v] = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin
        for (int v = 0; v < NV; v++)
          for (int f = 0; f < NF; f++) begin
            @(negedge clk);
            while ($urandom_range(0, 2) == 0) @(negedge clk);
            in_valid = 1; in_fold = 2'(f); in_act = sent[v][f*PE*AB +: PE*AB];
            @(posedge clk);
            while (!in_ready) begin nblocked++; @(posedge clk); end
            @(negedge clk) in_valid = 0;
          end
      end
      begin
        for (int v = 0; v < NV; v++) begin
          @(negedge clk);
          out_ready = ($urandom_range(0, 1) == 0);
          while (!(out_valid && out_ready)) begin
            @(negedge clk);
            out_ready = ($urandom_range(0, 1) == 0);
          end
          checks++;
          if (out_vec != sent[v]) begin failures++; $display("FAIL vector %0d", v); end
          @(posedge clk);
          #1 out_ready = 0;
        end
      end
    join
    checks++;
    if (nblocked == 0) begin failures++; $display("FAIL: never blocked"); end
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
