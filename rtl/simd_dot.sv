// simd_dot: the multiply stage of a processing element.
//
// Each of the SIMD lanes multiplies one weight by one input activation and
// the lane products are added into one signed partial sum, all in the same
// cycle (purely combinational). For 1-bit weights and 1-bit inputs the
// product of two bipolar values is an XNOR of their codes (+1 when the codes
// agree, -1 otherwise), which is the structure the paper draws for a binarized
// PE. Wider operands are decoded (1-bit bipolar or two's complement) and
// multiplied as signed numbers; that generalisation and the plain adder
// chain are this design's choices.
//
// Interface: w holds lane i at bits [i*WBITS +: WBITS], x lane i at
// [i*IN_BITS +: IN_BITS]; psum is the signed sum, PSUM_W bits wide.
module simd_dot
  import qnn_pkg::*;
#(
  parameter int unsigned SIMD    = 27,
  parameter int unsigned WBITS   = 1,
  parameter int unsigned IN_BITS = 8,
  parameter int unsigned PSUM_W  = acc_width(SIMD, WBITS, IN_BITS)
) (
  input  logic [SIMD*WBITS-1:0]    w,
  input  logic [SIMD*IN_BITS-1:0]  x,
  output logic signed [PSUM_W-1:0] psum
);

  // Products of up to 2^(WBITS-1) * 2^(IN_BITS-1) need WBITS+IN_BITS bits.
  localparam int unsigned PROD_W = WBITS + IN_BITS + 1;

  logic signed [PROD_W-1:0] prod [SIMD];

  // Sign-extended value of one operand, bipolar when it has one bit.
  function automatic logic signed [PROD_W-1:0] decode_w(input logic [WBITS-1:0] c);
    if (WBITS == 1) return c[0] ? PROD_W'(1) : -PROD_W'(1);
    else            return PROD_W'(signed'(c));
  endfunction

  function automatic logic signed [PROD_W-1:0] decode_x(input logic [IN_BITS-1:0] c);
    if (IN_BITS == 1) return c[0] ? PROD_W'(1) : -PROD_W'(1);
    else              return PROD_W'(signed'(c));
  endfunction

  for (genvar i = 0; i < SIMD; i++) begin : g_lane
    if (WBITS == 1 && IN_BITS == 1) begin : g_xnor
      // XNOR of the two codes: equal codes give +1, different codes -1.
      assign prod[i] = (w[i] ~^ x[i]) ? PROD_W'(1) : -PROD_W'(1);
    end else begin : g_mul
      assign prod[i] = decode_w(w[i*WBITS +: WBITS]) * decode_x(x[i*IN_BITS +: IN_BITS]);
    end
  end

  always_comb begin
    psum = '0;
    for (int i = 0; i < SIMD; i++) psum += PSUM_W'(prod[i]);
  end

endmodule
