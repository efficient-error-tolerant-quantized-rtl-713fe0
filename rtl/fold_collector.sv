// fold_collector: gathers the folds of one output vector.
//
// The PE array delivers the activations of one output pixel in NF pieces,
// one per neuron fold. This block places fold f into slots f*PE .. f*PE+PE-1
// of a vector and offers the vector once all NF folds are in, so that the
// replicas of a triplicated channel, which run on different PEs and possibly
// in different folds, can be voted together. The block is this design's
// own; the paper only implies that all channels of a pixel are produced.
//
// Interface: in_valid/in_ready/in_fold/in_act (one fold, PE p at
// [p*ABITS +: ABITS]); out_valid/out_ready/out_vec (slot s at
// [s*ABITS +: ABITS]). Timing: out_valid rises the cycle after the last
// fold is taken. While a full vector waits no fold is taken, except in the
// cycle the vector leaves (out_ready high), so folds arriving every cycle
// pass without a bubble.
module fold_collector #(
  parameter int unsigned PE    = 32,
  parameter int unsigned NF    = 3,
  parameter int unsigned ABITS = 1,
  localparam int unsigned NF_W = (NF > 1) ? $clog2(NF) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [NF_W-1:0]          in_fold,
  input  logic [PE*ABITS-1:0]      in_act,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [NF*PE*ABITS-1:0]   out_vec
);

  logic [NF_W-1:0] cnt;
  logic            full;

  assign in_ready  = !full || out_ready;
  assign out_valid = full;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      for (int f = 0; f < NF; f++) begin
        if (f == int'(cnt)) out_vec[f*PE*ABITS +: PE*ABITS] <= in_act;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt  <= '0;
      full <= 1'b0;
    end else begin
      if (full && out_ready) full <= 1'b0;
      if (in_valid && in_ready) begin
        if (int'(cnt) == NF - 1) begin
          cnt  <= '0;
          full <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  // Folds must arrive in order.
  a_fold_order : assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && in_ready |-> in_fold == cnt);

endmodule
