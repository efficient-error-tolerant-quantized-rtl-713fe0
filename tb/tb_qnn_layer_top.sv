// tb_qnn_layer_top: end-to-end test of one error-tolerant layer at the
// default size (32 PEs, 3 neuron folds = 96 slots, 64 output channels,
// 27 inputs of 8 bits taken in one word, binary weights and outputs).
//
// A reference model here keeps the logical channels' weights and
// thresholds, the slot each copy is placed in, the stuck-at state of every
// slot and the channel map, and computes each expected output channel
// independently of the RTL. The test walks through:
//   1. default schedule (channel c on PE c mod 32), random input gaps and
//      output back-pressure; latency and rate of a gap-free burst;
//   2. a stuck-at on one channel slot, then restore by the host;
//   3. a stuck-at on one whole PE (all its folds), with a host threshold
//      write held off while the injector is busy;
//   4. selective triplication of 16 channels into the spare slots, with
//      replicas on other PEs, and a faulty PE that the vote must mask;
//   5. a reordered channel-to-slot schedule with a faulty PE.
// Each mechanism is counted and a mechanism that never happens counts as a
// failure.
module tb_qnn_layer_top;
  import qnn_pkg::*;

  localparam int PE = 32, NF = 3, OUT_CH = 64, SIMD = 27, MW = 27;
  localparam int WB = 1, IB = 8, AB = 1;
  localparam int SF = MW / SIMD, SLOTS = PE * NF;
  localparam int NT = (AB == 1) ? 1 : (1 << AB) - 2;
  localparam int OFF = (AB == 1) ? 0 : (1 << (AB - 1)) - 1;
  // largest |sum| = MW * max|w| * max|x|; the accumulator holds it signed and
  // thresholds are one bit wider
  localparam int MAXSUM = MW * ((WB == 1) ? 1 : 1 << (WB - 1)) * ((IB == 1) ? 1 : 1 << (IB - 1));
  localparam int TH_W = $clog2(MAXSUM + 1) + 2;
  localparam int TH_MAX = (1 << (TH_W - 1)) - 1;
  localparam int TH_RANGE = MAXSUM / 8;  // spread of the random thresholds
  localparam int SLOT_W = $clog2(SLOTS), SF_W = (SF > 1) ? $clog2(SF) : 1;
  localparam int TIDX_W = (NT > 1) ? $clog2(NT) : 1, CH_W = $clog2(OUT_CH);

  int checks = 0;
  int failures = 0;

  logic clk = 0, rst_n = 0;
  logic host_w_we = 0; logic [SLOT_W-1:0] host_w_slot = '0; logic [SF_W-1:0] host_w_sf = '0;
  logic [SIMD*WB-1:0] host_w_data = '0;
  logic host_th_we = 0, host_th_ready; logic [SLOT_W-1:0] host_th_slot = '0;
  logic [TIDX_W-1:0] host_th_idx = '0; logic [TH_W-1:0] host_th_data = '0;
  logic inj_valid = 0, inj_ready; inj_mode_e inj_mode = INJ_SLOT;
  logic [SLOT_W-1:0] inj_target = '0; logic [AB-1:0] inj_value = '0;
  logic map_we = 0; logic [CH_W-1:0] map_ch = '0;
  logic [SLOT_W-1:0] map_src0 = '0, map_src1 = '0, map_src2 = '0; logic map_tmr = 0;
  logic in_valid = 0, in_ready; logic [SIMD*IB-1:0] in_data = '0;
  logic out_valid, out_ready = 0; logic [OUT_CH*AB-1:0] out_act;

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  qnn_layer_top dut (
    .clk(clk), .rst_n(rst_n),
    .host_w_we(host_w_we), .host_w_slot(host_w_slot), .host_w_sf(host_w_sf), .host_w_data(host_w_data),
    .host_th_we(host_th_we), .host_th_ready(host_th_ready), .host_th_slot(host_th_slot),
    .host_th_idx(host_th_idx), .host_th_data(host_th_data),
    .inj_valid(inj_valid), .inj_ready(inj_ready), .inj_mode(inj_mode), .inj_target(inj_target),
    .inj_value(inj_value),
    .map_we(map_we), .map_ch(map_ch), .map_src0(map_src0), .map_src1(map_src1),
    .map_src2(map_src2), .map_tmr(map_tmr),
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_act(out_act));

  // ---------------- reference model ----------------
  logic [SIMD*WB-1:0] CW  [OUT_CH][SF];   // logical channel weights
  int                 CTH [OUT_CH][NT];   // logical channel thresholds
  int                 slot_ch [SLOTS];    // channel held by each slot, -1 none
  bit                 stuck   [SLOTS];
  logic [AB-1:0]      stuck_v [SLOTS];
  int                 m0 [OUT_CH], m1 [OUT_CH], m2 [OUT_CH];
  bit                 mt [OUT_CH];
  logic [SIMD*IB-1:0] X [SF];

  // mechanism counters
  int n_fold_vec = 0, n_stall = 0, n_gap = 0, n_inj_slot = 0, n_inj_pe = 0;
  int n_host_held = 0, n_tmr_masked = 0, n_tmr_used = 0, n_resched = 0;

  function automatic int dec(input int unsigned code, input int bits);
    if (bits == 1) return code[0] ? 1 : -1;
    return code[bits-1] ? int'(code) - (1 << bits) : int'(code);
  endfunction

  // fault-free value of logical channel c for input X
  function automatic logic [AB-1:0] chan_value(input int c);
    int sum, cnt;
    sum = 0;
    for (int f = 0; f < SF; f++)
      for (int i = 0; i < SIMD; i++)
        sum += dec(CW[c][f][i*WB +: WB], WB) * dec(X[f][i*IB +: IB], IB);
    cnt = 0;
    for (int i = 0; i < NT; i++) cnt += int'(sum > CTH[c][i]);
    return (AB == 1) ? AB'(cnt) : AB'(cnt - OFF);
  endfunction

  function automatic logic [AB-1:0] slot_value(input int s);
    if (stuck[s]) return stuck_v[s];
    return (slot_ch[s] >= 0) ? chan_value(slot_ch[s]) : '0;
  endfunction

  function automatic logic [AB-1:0] expect_out(input int o);
    logic [AB-1:0] a, b, c;
    a = slot_value(m0[o]); b = slot_value(m1[o]); c = slot_value(m2[o]);
    return mt[o] ? ((a & b) | (a & c) | (b & c)) : a;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- host operations ----------------
  task automatic write_th(input int s, input int i, input int v);
    host_th_we = 1; host_th_slot = SLOT_W'(s); host_th_idx = TIDX_W'(i); host_th_data = TH_W'(v);
    #1;
    while (!host_th_ready) begin n_host_held++; @(negedge clk); #1; end
    @(negedge clk);
    host_th_we = 0;
  endtask

  // place logical channel c (or nothing, c = -1) in slot s
  task automatic place(input int s, input int c);
    slot_ch[s] = c;
    stuck[s] = 0;
    for (int f = 0; f < SF; f++) begin
      host_w_we = 1; host_w_slot = SLOT_W'(s); host_w_sf = SF_W'(f);
      host_w_data = (c >= 0) ? CW[c][f] : '0;
      @(negedge clk);
    end
    host_w_we = 0;
    for (int i = 0; i < NT; i++) write_th(s, i, (c >= 0) ? CTH[c][i] : 0);
  endtask

  task automatic set_map(input int o, input int a, input int b, input int c, input bit t);
    m0[o] = a; m1[o] = b; m2[o] = c; mt[o] = t;
    map_we = 1; map_ch = CH_W'(o); map_src0 = SLOT_W'(a); map_src1 = SLOT_W'(b);
    map_src2 = SLOT_W'(c); map_tmr = t;
    @(negedge clk);
    map_we = 0;
  endtask

  task automatic inject(input inj_mode_e m, input int tgt, input logic [AB-1:0] v, input bit host_race);
    #1;
    while (!inj_ready) begin @(negedge clk); #1; end
    inj_valid = 1; inj_mode = m; inj_target = SLOT_W'(tgt); inj_value = v;
    @(negedge clk);
    inj_valid = 0;
    // a host write issued now must wait for the injector; it rewrites the
    // threshold of a slot outside the injected set with its own value
    if (host_race) begin
      int s;
      s = (m == INJ_PE) ? ((tgt + 1) % PE) : ((tgt + 1) % SLOTS);
      write_th(s, 0, (slot_ch[s] >= 0) ? CTH[slot_ch[s]][0] : 0);
    end
    #1;
    while (!inj_ready) begin @(negedge clk); #1; end
    if (m == INJ_SLOT) begin stuck[tgt] = 1; stuck_v[tgt] = v; end
    else for (int f = 0; f < NF; f++) begin stuck[f*PE + tgt] = 1; stuck_v[f*PE + tgt] = v; end
  endtask

  // rewrite the fault-free thresholds of slot s
  task automatic restore(input int s);
    for (int i = 0; i < NT; i++) write_th(s, i, (slot_ch[s] >= 0) ? CTH[slot_ch[s]][i] : 0);
    stuck[s] = 0;
  endtask

  // ---------------- data path ----------------
  // Sends nv random vectors and checks every output. With burst set there
  // are no gaps and no back-pressure, and the latency and rate are checked.
  // Returns how many outputs differed from the fault-free channel values.
  task automatic run(input int nv, input bit burst, output int n_diff);
    int t_in, t_out, t_prev;
    n_diff = 0;
    t_prev = -1;
    for (int v = 0; v < nv; v++) begin
      logic [OUT_CH*AB-1:0] want, clean;
      foreach (X[f])
        for (int b = 0; b < SIMD*IB; b++) X[f][b] = 1'($urandom);
      for (int o = 0; o < OUT_CH; o++) begin
        want[o*AB +: AB]  = expect_out(o);
        clean[o*AB +: AB] = chan_value(o);
      end
      t_in = -1;
      fork
        begin
          for (int f = 0; f < SF; f++) begin
            if (!burst) while ($urandom_range(0, 3) == 0) begin in_valid = 0; n_gap++; @(negedge clk); end
            in_valid = 1; in_data = X[f];
            #1;
            while (!in_ready) begin @(negedge clk); #1; end
            if (f == 0) t_in = cyc;
            @(negedge clk);
          end
          in_valid = 0;
        end
        begin
          out_ready = burst || ($urandom_range(0, 2) != 0);
          #1;
          while (!(out_valid && out_ready)) begin
            if (out_valid) n_stall++;
            @(negedge clk);
            out_ready = burst || ($urandom_range(0, 2) != 0);
            #1;
          end
          t_out = cyc;
          check(out_act == want, $sformatf("vector %0d: got %h want %h", v, out_act, want));
          for (int o = 0; o < OUT_CH; o++) if (out_act[o*AB +: AB] != clean[o*AB +: AB]) n_diff++;
          @(negedge clk);
          out_ready = 0;
        end
      join
      if (NF > 1) n_fold_vec++;
      if (burst) begin
        // first vector: latency from the first word; the output follows the
        // fold register, the collector and the voter register
        if (v == 0) check(t_out - t_in == NF*SF + 2, $sformatf("latency %0d", t_out - t_in));
        t_prev = t_out;
      end
    end
  endtask

  // Sends a burst of vectors back to back and checks the output rate.
  task automatic rate_check();
    int t [$];
    fork
      begin
        for (int v = 0; v < 4; v++)
          for (int f = 0; f < SF; f++) begin
            in_valid = 1; in_data = (SIMD*IB)'($urandom);
            #1;
            while (!in_ready) begin @(negedge clk); #1; end
            @(negedge clk);
          end
        in_valid = 0;
      end
      begin
        out_ready = 1;
        for (int v = 0; v < 4; v++) begin
          #1;
          while (!out_valid) begin @(negedge clk); #1; end
          t.push_back(cyc);
          @(negedge clk);
        end
        out_ready = 0;
      end
    join
    for (int k = 1; k < 4; k++) check(t[k] - t[k-1] == NF*SF, $sformatf("vector interval %0d", t[k] - t[k-1]));
  endtask

  initial begin
    int nd;
    int perm [OUT_CH];
    int crit [$];
    // random layer parameters, thresholds around the typical sums
    for (int c = 0; c < OUT_CH; c++) begin
      for (int f = 0; f < SF; f++) CW[c][f] = (SIMD*WB)'($urandom);
      for (int i = 0; i < NT; i++) CTH[c][i] = int'($urandom_range(0, 2*TH_RANGE)) - TH_RANGE;
      m0[c] = c; m1[c] = c; m2[c] = c; mt[c] = 0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;

    // 1. default schedule: channel c in slot c, i.e. PE c mod PE
    for (int s = 0; s < SLOTS; s++) place(s, (s < OUT_CH) ? s : -1);
    run(1, 1, nd);
    run(6, 0, nd);
    check(nd == 0, "fault-free run differs from the channel values");
    rate_check();

    // 2. one channel stuck, then restored
    begin
      int s;
      logic [AB-1:0] v;
      s = 23;
      v = (AB == 1) ? AB'(1) : {AB{1'b1}};  // +1 (binary) / -1 (multi-bit)
      inject(INJ_SLOT, s, v, 1);
      run(4, 0, nd);
      if (nd > 0) n_inj_slot++;
      restore(s);
      run(2, 0, nd);
      check(nd == 0, "restore after slot injection");
    end

    // 3. one whole PE stuck at -1 (code 0 for binary, 11 for multi-bit)
    begin
      int p;
      p = 30;
      inject(INJ_PE, p, (AB == 1) ? AB'(0) : {AB{1'b1}}, 1);
      run(4, 0, nd);
      if (nd > 0) n_inj_pe++;
      for (int f = 0; f < NF; f++) restore(f*PE + p);
      run(2, 0, nd);
      check(nd == 0, "restore after PE injection");
    end

    // 4. selective triplication of 16 channels: replica 1 of channel j-th in
    //    slot 64+j (PE j), replica 2 in slot 80+j (PE 16+j); the chosen
    //    channels run on other PEs so the three copies use three PEs
    if (SLOTS >= OUT_CH + 32) begin
      for (int j = 0; j < 16; j++) crit.push_back(j + 8);  // PE j+8
      for (int j = 0; j < 16; j++) begin
        place(OUT_CH + j, crit[j]);
        place(OUT_CH + 16 + j, crit[j]);
        set_map(crit[j], crit[j], OUT_CH + j, OUT_CH + 16 + j, 1);
        n_tmr_used++;
      end
      run(3, 0, nd);
      check(nd == 0, "triplicated fault-free run");
      // faulty PE 3: hosts replica 1 of crit[3] (slot 67) and channels 3, 35
      inject(INJ_PE, 3, (AB == 1) ? AB'(0) : {AB{1'b1}}, 0);
      for (int v = 0; v < 6; v++) begin
        int nd1;
        run(1, 0, nd1);
        // crit[3] = 11 must be masked; count vectors where its replica was wrong
        if (slot_value(OUT_CH + 3) != chan_value(crit[3])) n_tmr_masked++;
        check(expect_out(crit[3]) == chan_value(crit[3]), "model: triplicated channel masked");
      end
      // faulty PE 11 hosts the primary copy of channel 11 itself
      for (int f = 0; f < NF; f++) restore(f*PE + 3);
      inject(INJ_PE, 11, (AB == 1) ? AB'(1) : AB'(1), 0);
      for (int v = 0; v < 6; v++) begin
        int nd1;
        run(1, 0, nd1);
        if (slot_value(11) != chan_value(11)) n_tmr_masked++;
      end
      for (int f = 0; f < NF; f++) restore(f*PE + 11);
      // back to no replication
      for (int j = 0; j < 16; j++) begin
        place(OUT_CH + j, -1);
        place(OUT_CH + 16 + j, -1);
      end
    end

    // 5. reordered schedule: random permutation of the channels over the
    //    first OUT_CH slots, the map reads them back in channel order
    for (int c = 0; c < OUT_CH; c++) perm[c] = c;
    perm.shuffle();
    for (int c = 0; c < OUT_CH; c++) begin
      place(perm[c], c);
      set_map(c, perm[c], perm[c], perm[c], 0);
    end
    run(4, 0, nd);
    check(nd == 0, "reordered schedule fault-free");
    n_resched++;
    inject(INJ_PE, 5, (AB == 1) ? AB'(0) : {AB{1'b1}}, 0);
    run(3, 0, nd);
    if (nd > 0) n_resched++;

    $display("mechanisms: folded vectors=%0d input gaps=%0d output stalls=%0d slot injections seen=%0d PE injections seen=%0d host writes held=%0d TMR channels=%0d TMR masked=%0d reschedules=%0d",
             n_fold_vec, n_gap, n_stall, n_inj_slot, n_inj_pe, n_host_held, n_tmr_used, n_tmr_masked, n_resched);
    check(n_fold_vec > 0, "folding never happened");
    check(n_gap > 0, "input gap never happened");
    check(n_stall > 0, "output stall never happened");
    check(n_inj_slot > 0, "slot injection had no effect");
    check(n_inj_pe > 0, "PE injection had no effect");
    check(n_host_held > 0, "host write never held off");
    check(SLOTS < OUT_CH + 32 || n_tmr_used > 0, "no triplicated channel");
    check(SLOTS < OUT_CH + 32 || n_tmr_masked > 0, "vote never masked a fault");
    check(n_resched > 1, "reordered schedule not exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
