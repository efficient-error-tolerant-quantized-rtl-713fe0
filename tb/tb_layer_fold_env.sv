// tb_layer_fold_env: one point of the folding sweep, used by
// tb_folding_sweep. It builds the binarized first layer (64 channels,
// 27 8-bit inputs per word) with PE processing elements and NF = 64/PE
// neuron folds under the default schedule (channel c in slot c, on PE
// c mod PE), checks fault-free vectors and the rate of one vector per
// NF*SF cycles, then makes one PE stuck at 0 (the -1 code) and checks that
// every channel on that PE, and no other, reads 0. The reference values are
// computed here. Results are returned on checks_o/failures_o with done_o.
module tb_layer_fold_env
  import qnn_pkg::*;
#(
  parameter int PE = 32,
  parameter int FAULTY_PE = 5
) (
  output int checks_o,
  output int failures_o,
  output bit done_o
);
  localparam int OUT_CH = 64, NF = OUT_CH / PE, SIMD = 27, MW = 27, SF = MW / SIMD;
  localparam int SLOTS = PE * NF, TH_W = 14;
  localparam int SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1, SF_W = (SF > 1) ? $clog2(SF) : 1, CH_W = $clog2(OUT_CH);

  int checks = 0, failures = 0;
  assign checks_o = checks;
  assign failures_o = failures;

  logic clk = 0, rst_n = 0;
  logic host_w_we = 0; logic [SLOT_W-1:0] host_w_slot = '0; logic [SF_W-1:0] host_w_sf = '0;
  logic [SIMD-1:0] host_w_data = '0;
  logic host_th_we = 0, host_th_ready; logic [SLOT_W-1:0] host_th_slot = '0;
  logic [0:0] host_th_idx = '0; logic [TH_W-1:0] host_th_data = '0;
  logic inj_valid = 0, inj_ready; inj_mode_e inj_mode = INJ_PE;
  logic [SLOT_W-1:0] inj_target = '0; logic [0:0] inj_value = '0;
  logic in_valid = 0, in_ready; logic [SIMD*8-1:0] in_data = '0;
  logic out_valid, out_ready = 1; logic [OUT_CH-1:0] out_act;

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  qnn_layer_top #(.PE(PE), .NF(NF), .OUT_CH(OUT_CH), .SIMD(SIMD), .MATRIX_W(MW),
                  .WBITS(1), .IN_BITS(8), .ABITS(1)) dut (
    .clk(clk), .rst_n(rst_n),
    .host_w_we(host_w_we), .host_w_slot(host_w_slot), .host_w_sf(host_w_sf), .host_w_data(host_w_data),
    .host_th_we(host_th_we), .host_th_ready(host_th_ready), .host_th_slot(host_th_slot),
    .host_th_idx(host_th_idx), .host_th_data(host_th_data),
    .inj_valid(inj_valid), .inj_ready(inj_ready), .inj_mode(inj_mode), .inj_target(inj_target),
    .inj_value(inj_value),
    .map_we(1'b0), .map_ch('0), .map_src0('0), .map_src1('0), .map_src2('0), .map_tmr(1'b0),
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_act(out_act));

  logic [SIMD-1:0]   CW [OUT_CH][SF];
  int                CTH [OUT_CH];
  logic [SIMD*8-1:0] X [4][SF];

  function automatic logic chan_value(input int c, input int v);
    int sum;
    sum = 0;
    for (int f = 0; f < SF; f++)
      for (int i = 0; i < SIMD; i++)
        sum += (CW[c][f][i] ? 1 : -1) * int'($signed(X[v][f][i*8 +: 8]));
    return sum > CTH[c];
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (PE=%0d): %s", PE, what); end
  endtask

  // four vectors back to back; checks values, and the rate when fault free
  task automatic run4(input bit faulty);
    int t [$];
    foreach (X[v, f])
      for (int b = 0; b < SIMD*8; b++) X[v][f][b] = 1'($urandom);
    fork
      begin
        for (int v = 0; v < 4; v++)
          for (int f = 0; f < SF; f++) begin
            in_valid = 1; in_data = X[v][f];
            #1;
            while (!in_ready) begin @(negedge clk); #1; end
            @(negedge clk);
          end
        in_valid = 0;
      end
      begin
        for (int v = 0; v < 4; v++) begin
          #1;
          while (!out_valid) begin @(negedge clk); #1; end
          t.push_back(cyc);
          for (int c = 0; c < OUT_CH; c++) begin
            logic want;
            want = (faulty && c % PE == FAULTY_PE) ? 1'b0 : chan_value(c, v);
            check(out_act[c] == want, $sformatf("vector %0d channel %0d", v, c));
          end
          @(negedge clk);
        end
      end
    join
    for (int k = 1; k < 4; k++) check(t[k] - t[k-1] == NF*SF, $sformatf("interval %0d", t[k] - t[k-1]));
  endtask

  initial begin
    int affected;
    for (int c = 0; c < OUT_CH; c++) begin
      for (int f = 0; f < SF; f++) CW[c][f] = SIMD'($urandom);
      CTH[c] = int'($urandom_range(0, 800)) - 400;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int c = 0; c < OUT_CH; c++) begin
      for (int f = 0; f < SF; f++) begin
        host_w_we = 1; host_w_slot = SLOT_W'(c); host_w_sf = SF_W'(f); host_w_data = CW[c][f];
        @(negedge clk);
      end
      host_w_we = 0;
      host_th_we = 1; host_th_slot = SLOT_W'(c); host_th_data = TH_W'(CTH[c]);
      @(negedge clk);
      host_th_we = 0;
    end
    run4(0);
    inj_valid = 1; inj_mode = INJ_PE; inj_target = SLOT_W'(FAULTY_PE); inj_value = 1'b0;
    @(negedge clk);
    inj_valid = 0;
    #1;
    while (!inj_ready) begin @(negedge clk); #1; end
    run4(1);
    affected = 0;
    for (int c = 0; c < OUT_CH; c++) if (c % PE == FAULTY_PE) affected++;
    check(affected == NF, "channels per PE equals the folding factor");
    done_o = 1;
  end

  initial done_o = 0;
endmodule
