// tb_simd_dot: drives random weight and activation words into three
// instances of simd_dot (1-bit x 8-bit, 1-bit x 1-bit XNOR, 2-bit x 2-bit)
// and compares the partial sum with a sum of products computed here from
// the value encodings (bipolar for 1 bit, two's complement otherwise).
module tb_simd_dot;
  int checks = 0;
  int failures = 0;

  logic [2:0]  w_a;  logic [23:0] x_a;  logic signed [12:0] p_a;  // default
  logic [7:0]  w_b;  logic [7:0]  x_b;  logic signed [4:0]  p_b;  // xnor
  logic [7:0]  w_c;  logic [7:0]  x_c;  logic signed [5:0]  p_c;  // 2x2 bit

  simd_dot #(.SIMD(3), .WBITS(1), .IN_BITS(8), .PSUM_W(13)) dut_a (.w(w_a), .x(x_a), .psum(p_a));
  simd_dot #(.SIMD(8), .WBITS(1), .IN_BITS(1), .PSUM_W(5))  dut_b (.w(w_b), .x(x_b), .psum(p_b));
  simd_dot #(.SIMD(4), .WBITS(2), .IN_BITS(2), .PSUM_W(6))  dut_c (.w(w_c), .x(x_c), .psum(p_c));

  function automatic int dec(input int unsigned code, input int bits);
    if (bits == 1) return code[0] ? 1 : -1;
    return code[bits-1] ? int'(code) - (1 << bits) : int'(code);
  endfunction

  initial begin
    for (int t = 0; t < 300; t++) begin
      int ea, eb, ec;
      w_a = 3'($urandom); x_a = 24'($urandom);
      w_b = 8'($urandom); x_b = 8'($urandom);
      w_c = 8'($urandom); x_c = 8'($urandom);
      if (t == 0) begin w_b = 8'hFF; x_b = 8'hFF; end  // all agree: +8
      if (t == 1) begin w_b = 8'h00; x_b = 8'hFF; end  // all differ: -8
      #1;
      ea = 0; eb = 0; ec = 0;
      for (int i = 0; i < 3; i++) ea += dec(w_a[i], 1) * dec(x_a[i*8 +: 8], 8);
      for (int i = 0; i < 8; i++) eb += dec(w_b[i], 1) * dec(x_b[i], 1);
      for (int i = 0; i < 4; i++) ec += dec(w_c[i*2 +: 2], 2) * dec(x_c[i*2 +: 2], 2);
      checks += 3;
      if (int'(p_a) != ea) begin failures++; $display("FAIL a: %0d != %0d", p_a, ea); end
      if (int'(p_b) != eb) begin failures++; $display("FAIL b: %0d != %0d", p_b, eb); end
      if (int'(p_c) != ec) begin failures++; $display("FAIL c: %0d != %0d", p_c, ec); end
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
