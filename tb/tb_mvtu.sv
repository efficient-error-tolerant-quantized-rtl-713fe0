// tb_mvtu: a ternary matrix-vector threshold unit (4 PEs, 2 neuron folds,
// SIMD 3, 9 inputs, 2-bit weights, inputs and outputs) is loaded with random
// weights and thresholds through its write ports. Random input vectors are
// streamed with random gaps and random output back-pressure, and every fold
// is compared with a reference computed here (dot product of the slot's
// weights with the vector, number of thresholds exceeded minus one). It
// also checks the fold order and, for a burst without gaps or
// back-pressure, the rate of one fold per SF = 3 cycles and the latency of
// SF cycles from the first word to the first fold.
module tb_mvtu;
  int checks = 0;
  int failures = 0;

  localparam int PE = 4, NF = 2, SIMD = 3, MW = 9, WB = 2, IB = 2, AB = 2;
  localparam int SF = MW / SIMD, SLOTS = PE * NF, NT = 2, TH_W = 8;  // |sum| <= 36: 7-bit accumulator

  logic clk = 0, rst_n = 0;
  logic w_we = 0; logic [2:0] w_slot; logic [1:0] w_sf; logic [SIMD*WB-1:0] w_data;
  logic th_we = 0; logic [2:0] th_slot; logic [0:0] th_idx; logic [TH_W-1:0] th_data;
  logic in_valid = 0, in_ready; logic [SIMD*IB-1:0] in_data;
  logic out_valid, out_ready = 0; logic [0:0] out_fold; logic [PE*AB-1:0] out_act;

  logic [SIMD*WB-1:0] W [SLOTS][SF];
  int TH [SLOTS][NT];
  localparam int NV = 30;
  logic [SIMD*IB-1:0] X [NV][SF];
  int cyc = 0, t_first_in = -1, t_fold [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  mvtu #(.PE(PE), .NF(NF), .SIMD(SIMD), .MATRIX_W(MW), .WBITS(WB), .IN_BITS(IB), .ABITS(AB)) dut (
    .clk(clk), .rst_n(rst_n),
    .w_we(w_we), .w_slot(w_slot), .w_sf(w_sf), .w_data(w_data),
    .th_we(th_we), .th_slot(th_slot), .th_idx(th_idx), .th_data(th_data),
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_fold(out_fold), .out_act(out_act));

  function automatic int dec2(input logic [1:0] c);
    return c[1] ? int'(c) - 4 : int'(c);
  endfunction

  function automatic logic [AB-1:0] ref_act(input int s, input int v);
    int sum, cnt;
    sum = 0;
    for (int f = 0; f < SF; f++)
      for (int i = 0; i < SIMD; i++)
        sum += dec2(W[s][f][i*WB +: WB]) * dec2(X[v][f][i*IB +: IB]);
    cnt = int'(sum > TH[s][0]) + int'(sum > TH[s][1]);
    return AB'(cnt - 1);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    foreach (X[v, f]) X[v][f] = SIMD*IB'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < SLOTS; s++) begin
      for (int f = 0; f < SF; f++) begin
        W[s][f] = SIMD*WB'($urandom);
        @(negedge clk); w_we = 1; w_slot = 3'(s); w_sf = 2'(f); w_data = W[s][f];
      end
      for (int i = 0; i < NT; i++) begin
        TH[s][i] = int'($urandom_range(0, 8)) - 4;
        @(negedge clk); w_we = 0; th_we = 1; th_slot = 3'(s); th_idx = 1'(i); th_data = TH_W'(TH[s][i]);
      end
    end
    @(negedge clk); w_we = 0; th_we = 0;
    @(negedge clk);
    fork
      begin : drive
        // inputs change just after a falling edge; a word is taken at the
        // next rising edge when in_ready is high then
        for (int v = 0; v < NV; v++)
          for (int f = 0; f < SF; f++) begin
            if (v < NV - 5) while ($urandom_range(0, 2) == 0) begin in_valid = 0; @(negedge clk); end
            in_valid = 1; in_data = X[v][f];
            #1;
            while (!in_ready) begin @(negedge clk); #1; end
            if (v == NV - 5 && f == 0) t_first_in = cyc;
            @(negedge clk);
          end
        in_valid = 0;
      end
      begin : monitor
        for (int v = 0; v < NV; v++)
          for (int n = 0; n < NF; n++) begin
            out_ready = (v >= NV - 6) || ($urandom_range(0, 2) != 0);
            #1;
            while (!(out_valid && out_ready)) begin
              @(negedge clk);
              out_ready = (v >= NV - 6) || ($urandom_range(0, 2) != 0);
              #1;
            end
            if (v >= NV - 5) t_fold.push_back(cyc);
            check(int'(out_fold) == n, $sformatf("fold index v=%0d n=%0d", v, n));
            for (int p = 0; p < PE; p++)
              check(out_act[p*AB +: AB] == ref_act(n*PE + p, v),
                    $sformatf("v=%0d fold=%0d pe=%0d got %b want %b", v, n, p, out_act[p*AB +: AB], ref_act(n*PE + p, v)));
            @(negedge clk);
          end
      end
    join
    // burst of the last 5 vectors: one fold every SF cycles after the first
    check(t_fold[0] - t_first_in == SF, $sformatf("latency %0d", t_fold[0] - t_first_in));
    for (int k = 1; k < t_fold.size(); k++)
      check(t_fold[k] - t_fold[k-1] == SF, $sformatf("fold interval %0d", t_fold[k] - t_fold[k-1]));
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
