// mvtu_pe: one processing element of the matrix-vector threshold unit.
//
// Following the paper's PE (element-wise products, reduction, accumulator,
// thresholding), the PE takes one SIMD word of weights and one of input
// activations per enabled cycle, adds their dot product to an accumulator,
// and at the last word of a neuron fold compares the complete sum with the
// thresholds of the output channel it is computing and registers the
// resulting activation. Time-multiplexing several output channels on one PE
// (folding) is done by the caller, which presents the weights and thresholds
// of the channel that belongs to the current fold.
//
// Timing: with en high, sf_first restarts the sum with the current product,
// and sf_last loads act at the clock edge that takes the last word, so act
// is valid one cycle after the last word and holds until the next fold ends.
// th is sampled in the sf_last cycle. The accumulator and output are reset
// to zero by a synchronous active-low rst_n (this design's choice; the paper
// gives no reset behaviour).
module mvtu_pe
  import qnn_pkg::*;
#(
  parameter int unsigned SIMD     = 27,
  parameter int unsigned WBITS    = 1,
  parameter int unsigned IN_BITS  = 8,
  parameter int unsigned ABITS    = 1,
  parameter int unsigned MATRIX_W = 27,
  parameter int unsigned ACC_W    = acc_width(MATRIX_W, WBITS, IN_BITS),
  parameter int unsigned TH_W     = ACC_W + 1,
  parameter int unsigned NUM_TH   = num_thresholds(ABITS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    sf_first,
  input  logic                    sf_last,
  input  logic [SIMD*WBITS-1:0]   w,
  input  logic [SIMD*IN_BITS-1:0] x,
  input  logic [NUM_TH*TH_W-1:0]  th,
  output logic [ABITS-1:0]        act
);

  localparam int unsigned PSUM_W = acc_width(SIMD, WBITS, IN_BITS);

  logic signed [PSUM_W-1:0] psum;
  logic signed [ACC_W-1:0]  acc, acc_next;
  logic [ABITS-1:0]         act_next;

  simd_dot #(
    .SIMD(SIMD), .WBITS(WBITS), .IN_BITS(IN_BITS), .PSUM_W(PSUM_W)
  ) u_dot (
    .w(w), .x(x), .psum(psum)
  );

  assign acc_next = (sf_first ? '0 : acc) + ACC_W'(psum);

  thresholding #(
    .ABITS(ABITS), .ACC_W(ACC_W), .TH_W(TH_W), .NUM_TH(NUM_TH)
  ) u_th (
    .val(acc_next), .th(th), .act(act_next)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc <= '0;
      act <= '0;
    end else if (en) begin
      acc <= acc_next;
      if (sf_last) act <= act_next;
    end
  end

endmodule
