// tb_folding_sweep: the folding-factor study on the binarized first layer
// (64 output channels): the same layer is built with 64, 32, 16, 8, 4 and 2
// processing elements (folding factors 1 to 32) and in each one PE is made
// stuck at 0. Each point (tb_layer_fold_env) checks that exactly the
// channels scheduled on the faulty PE (c mod PE) are stuck, that the others
// are unaffected, and that one output vector takes f cycles.
module tb_folding_sweep;
  localparam int N = 6;
  int  c [N];
  int  f [N];
  bit  d [N];
  int  checks, failures;

  tb_layer_fold_env #(.PE(64), .FAULTY_PE(40)) u_f1  (.checks_o(c[0]), .failures_o(f[0]), .done_o(d[0]));
  tb_layer_fold_env #(.PE(32), .FAULTY_PE(30)) u_f2  (.checks_o(c[1]), .failures_o(f[1]), .done_o(d[1]));
  tb_layer_fold_env #(.PE(16), .FAULTY_PE(7))  u_f4  (.checks_o(c[2]), .failures_o(f[2]), .done_o(d[2]));
  tb_layer_fold_env #(.PE(8),  .FAULTY_PE(3))  u_f8  (.checks_o(c[3]), .failures_o(f[3]), .done_o(d[3]));
  tb_layer_fold_env #(.PE(4),  .FAULTY_PE(1))  u_f16 (.checks_o(c[4]), .failures_o(f[4]), .done_o(d[4]));
  tb_layer_fold_env #(.PE(2),  .FAULTY_PE(0))  u_f32 (.checks_o(c[5]), .failures_o(f[5]), .done_o(d[5]));

  function automatic bit all_done();
    foreach (d[i]) if (!d[i]) return 0;
    return 1;
  endfunction

  task automatic report();
    checks = 0;
    foreach (c[i]) begin checks += c[i]; failures += f[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    failures = 0;
    while (!all_done()) #100;
    report();
  end

  initial begin
    #2000000;
    failures = 1;
    $display("watchdog expired");
    report();
  end
endmodule
