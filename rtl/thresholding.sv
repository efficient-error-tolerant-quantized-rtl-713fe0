// thresholding: turns an accumulation into a quantized activation.
//
// The activation is the number of thresholds the accumulation exceeds,
// sum_i (val > th_i), which is how the paper describes the activation of a
// matrix-vector threshold unit (biases, batch normalisation and quantisation
// are folded into the thresholds offline). For a 1-bit output there is one
// threshold and the count is the bipolar code. For an a-bit output there are
// 2^a - 2 thresholds and the count (0 .. 2^a - 2) is shifted down by
// 2^(a-1) - 1 to a symmetric two's complement value; this mapping is this
// design's reading of the paper's symmetric activations. The thresholds need
// not be sorted.
//
// Because a threshold of +TH_MAX is never exceeded and one of -TH_MAX is
// always exceeded, overwriting thresholds forces the output to any value:
// that is the stuck-at injection mechanism.
//
// Combinational. th holds threshold i at [i*TH_W +: TH_W], signed.
module thresholding
  import qnn_pkg::*;
#(
  parameter int unsigned ABITS  = 1,
  parameter int unsigned ACC_W  = 13,
  parameter int unsigned TH_W   = ACC_W + 1,
  parameter int unsigned NUM_TH = num_thresholds(ABITS)
) (
  input  logic signed [ACC_W-1:0]   val,
  input  logic [NUM_TH*TH_W-1:0]    th,
  output logic [ABITS-1:0]          act
);

  localparam int unsigned CNT_W = $clog2(NUM_TH + 1);
  localparam int unsigned OFFSET = act_offset(ABITS);

  logic [CNT_W-1:0]        count;
  logic signed [TH_W-1:0]  val_x;

  assign val_x = TH_W'(val);  // sign extension

  always_comb begin
    count = '0;
    for (int i = 0; i < NUM_TH; i++) begin
      if (val_x > $signed(th[i*TH_W +: TH_W])) count += CNT_W'(1);
    end
  end

  if (ABITS == 1) begin : g_bin
    assign act = count[0];
  end else begin : g_multi
    assign act = ABITS'(count) - ABITS'(OFFSET);
  end

endmodule
