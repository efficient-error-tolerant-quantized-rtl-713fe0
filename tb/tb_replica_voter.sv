// tb_replica_voter: a voter with 8 channels, 16 slots of 2 bits. After
// checking the identity map after reset, it writes a random map in which
// some channels are triplicated, sends random slot vectors and compares each
// channel with the value selected (or majority-voted bit by bit) here. It
// then corrupts one replica of each triplicated channel and checks that the
// vote still returns the value the other two agree on.
module tb_replica_voter;
  int checks = 0;
  int failures = 0;

  localparam int CH = 8, SL = 16, AB = 2;

  logic clk = 0, rst_n = 0, cfg_we = 0, cfg_tmr = 0;
  logic [2:0] cfg_ch; logic [3:0] cfg_src0, cfg_src1, cfg_src2;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [SL*AB-1:0] in_vec; logic [CH*AB-1:0] out_vec;
  int s0 [CH], s1 [CH], s2 [CH];
  bit tm [CH];

  always #5 clk = ~clk;

  replica_voter #(.OUT_CH(CH), .SLOTS(SL), .ABITS(AB)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_ch(cfg_ch), .cfg_src0(cfg_src0),
    .cfg_src1(cfg_src1), .cfg_src2(cfg_src2), .cfg_tmr(cfg_tmr),
    .in_valid(in_valid), .in_ready(in_ready), .in_vec(in_vec),
    .out_valid(out_valid), .out_ready(out_ready), .out_vec(out_vec));

  function automatic logic [AB-1:0] sl(input logic [SL*AB-1:0] v, input int s);
    return v[s*AB +: AB];
  endfunction

  task automatic send_check(input logic [SL*AB-1:0] v);
    @(negedge clk); in_vec = v; in_valid = 1;
    @(negedge clk); in_valid = 0;
    checks++;
    if (!out_valid) begin failures++; $display("FAIL: no output"); end
    for (int o = 0; o < CH; o++) begin
      logic [AB-1:0] a, b, c, e;
      a = sl(v, s0[o]); b = sl(v, s1[o]); c = sl(v, s2[o]);
      e = tm[o] ? ((a & b) | (b & c) | (a & c)) : a;
      checks++;
      if (out_vec[o*AB +: AB] != e) begin failures++; $display("FAIL ch %0d: %b != %b", o, out_vec[o*AB +: AB], e); end
    end
  endtask

  initial begin
    for (int o = 0; o < CH; o++) begin s0[o] = o; s1[o] = o; s2[o] = o; tm[o] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (5) send_check({$urandom, $urandom} );
    // random map, channels 1, 4 and 6 triplicated onto distinct slots
    for (int o = 0; o < CH; o++) begin
      tm[o] = (o == 1 || o == 4 || o == 6);
      s0[o] = int'($urandom_range(0, SL-1));
      s1[o] = (s0[o] + 5) % SL;
      s2[o] = (s0[o] + 11) % SL;
      @(negedge clk);
      cfg_we = 1; cfg_ch = 3'(o); cfg_src0 = 4'(s0[o]); cfg_src1 = 4'(s1[o]);
      cfg_src2 = 4'(s2[o]); cfg_tmr = tm[o];
    end
    @(negedge clk) cfg_we = 0;
    repeat (20) send_check({$urandom, $urandom});
    // one corrupted replica per triplicated channel is outvoted
    for (int t = 0; t < 20; t++) begin
      logic [SL*AB-1:0] v;
      v = {$urandom, $urandom};
      for (int o = 0; o < CH; o++) if (tm[o]) begin
        int bad;
        v[s1[o]*AB +: AB] = v[s0[o]*AB +: AB];
        v[s2[o]*AB +: AB] = v[s0[o]*AB +: AB];
        bad = (t % 3 == 0) ? s0[o] : (t % 3 == 1) ? s1[o] : s2[o];
        v[bad*AB +: AB] = ~v[bad*AB +: AB];
      end
      send_check(v);
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
