// qnn_pkg: encodings and helper functions shared by the quantized-layer RTL.
//
// Values of 1 bit are bipolar: code 0 means -1 and code 1 means +1, as in a
// binarized network. Values of 2 or more bits are two's complement and
// symmetric around zero, so a 2-bit (ternary) activation uses 11 = -1,
// 00 = 0 and 01 = +1; the code 10 is never produced. These encodings follow
// the paper. The widths derived here (accumulator, threshold word) are this
// design's own choice: the threshold word is one bit wider than the
// accumulator so that TH_MAX is larger than any reachable accumulation, and
// -TH_MAX is smaller than any.
package qnn_pkg;

  // What an injection command targets: one output slot, or every slot that
  // is scheduled on one processing element.
  typedef enum logic {
    INJ_SLOT = 1'b0,
    INJ_PE   = 1'b1
  } inj_mode_e;

  // Largest magnitude of a value of the given width.
  function automatic int unsigned val_mag(input int unsigned bits);
    return (bits == 1) ? 1 : (1 << (bits - 1));
  endfunction

  // Signed width of a sum of n products of a WBITS weight and an XBITS input.
  function automatic int unsigned acc_width(input int unsigned n,
                                            input int unsigned wbits,
                                            input int unsigned xbits);
    return $clog2(n * val_mag(wbits) * val_mag(xbits) + 1) + 1;
  endfunction

  // Thresholds per channel: one for a binary output, 2^a - 2 for a symmetric
  // a-bit output (2^a - 1 levels).
  function automatic int unsigned num_thresholds(input int unsigned abits);
    return (abits == 1) ? 1 : ((1 << abits) - 2);
  endfunction

  // Offset between the threshold count and the signed output value.
  function automatic int unsigned act_offset(input int unsigned abits);
    return (abits == 1) ? 0 : ((1 << (abits - 1)) - 1);
  endfunction

  // Bitwise two-out-of-three majority.
  function automatic logic [31:0] majority3(input logic [31:0] a,
                                            input logic [31:0] b,
                                            input logic [31:0] c);
    return (a & b) | (a & c) | (b & c);
  endfunction

  // Number of thresholds that must be forced to -TH_MAX (the rest go to
  // +TH_MAX) so that the channel outputs the given code. The unused code
  // 100..0 of a multi-bit output is clamped to the lowest level.
  function automatic int unsigned stuck_count(input int unsigned abits,
                                              input logic [31:0] code);
    int signed v;
    int signed k;
    if (abits == 1) return int'(code[0]);
    v = int'(code[abits-1] ? (code | (32'hFFFF_FFFF << abits)) : code);
    k = v + int'(act_offset(abits));
    return (k < 0) ? 0 : unsigned'(k);
  endfunction

endpackage
