// mvtu: matrix-vector threshold unit, the compute engine of one layer.
//
// PE processing elements share a stream of input activations. Each output
// position needs a dot product of length MATRIX_W per output slot; the unit
// computes NF*PE slots by folding: in neuron fold nf, PE pe computes slot
// nf*PE + pe, so with the default placement channel c runs on PE c mod PE as
// in the paper. Each fold takes SF = MATRIX_W/SIMD cycles, one SIMD word per
// cycle. The input vector arrives once, during fold 0, and is kept in an
// SF-word buffer from which folds 1 .. NF-1 read it again. Weights and
// thresholds come from the two on-chip stores, addressed by (fold, word);
// both have write ports, so the host can load a layer, reorder its channel
// schedule, and inject stuck-at errors by overwriting thresholds.
//
// Interface: in_valid/in_ready carry input words (word sf of the vector in
// lanes [i*IN_BITS +: IN_BITS]); out_valid/out_ready carry one fold of PE
// activations, PE p in out_act[p*ABITS +: ABITS], with out_fold its fold.
// Timing: with no back-pressure a fold is ready one cycle after its last
// word, and a complete output vector takes NF*SF cycles, i.e. the throughput
// is one vector per NF*SF cycles. The array steps only when the output
// register is free, so back-pressure stalls every PE. The buffer, the
// handshakes and the stall rule are this design's choices.
module mvtu
  import qnn_pkg::*;
#(
  parameter int unsigned PE       = 32,
  parameter int unsigned NF       = 3,
  parameter int unsigned SIMD     = 27,
  parameter int unsigned MATRIX_W = 27,
  parameter int unsigned WBITS    = 1,
  parameter int unsigned IN_BITS  = 8,
  parameter int unsigned ABITS    = 1,
  localparam int unsigned SF      = MATRIX_W / SIMD,
  localparam int unsigned ACC_W   = acc_width(MATRIX_W, WBITS, IN_BITS),
  localparam int unsigned TH_W    = ACC_W + 1,
  localparam int unsigned NUM_TH  = num_thresholds(ABITS),
  localparam int unsigned SLOTS   = PE * NF,
  localparam int unsigned SLOT_W  = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned NF_W    = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned SF_W    = (SF > 1) ? $clog2(SF) : 1,
  localparam int unsigned TIDX_W  = (NUM_TH > 1) ? $clog2(NUM_TH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight store write port
  input  logic                    w_we,
  input  logic [SLOT_W-1:0]       w_slot,
  input  logic [SF_W-1:0]         w_sf,
  input  logic [SIMD*WBITS-1:0]   w_data,
  // threshold store write port
  input  logic                    th_we,
  input  logic [SLOT_W-1:0]       th_slot,
  input  logic [TIDX_W-1:0]       th_idx,
  input  logic [TH_W-1:0]         th_data,
  // input activation stream
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [SIMD*IN_BITS-1:0] in_data,
  // output activations, one fold at a time
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [NF_W-1:0]         out_fold,
  output logic [PE*ABITS-1:0]     out_act
);

  if (MATRIX_W % SIMD != 0) begin : g_bad_simd
    $error("MATRIX_W must be a multiple of SIMD");
  end

  logic [NF_W-1:0]          nf;
  logic [SF_W-1:0]          sf;
  logic [SIMD*IN_BITS-1:0]  ibuf [SF];
  logic [SIMD*IN_BITS-1:0]  x;
  logic                     out_free, from_stream, step, sf_first, sf_last;
  logic [PE*SIMD*WBITS-1:0] w_all;
  logic [PE*NUM_TH*TH_W-1:0] th_all;

  assign out_free    = !out_valid || out_ready;
  assign from_stream = (nf == '0);
  assign step        = out_free && (from_stream ? in_valid : 1'b1);
  assign in_ready    = from_stream && out_free;
  assign x           = from_stream ? in_data : ibuf[sf];
  assign sf_first    = (sf == '0);
  assign sf_last     = (int'(sf) == SF - 1);

  always_ff @(posedge clk) begin
    if (step && from_stream) ibuf[sf] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      nf        <= '0;
      sf        <= '0;
      out_valid <= 1'b0;
      out_fold  <= '0;
    end else begin
      if (step) begin
        sf <= sf_last ? '0 : sf + 1'b1;
        if (sf_last) nf <= (int'(nf) == NF - 1) ? '0 : nf + 1'b1;
      end
      if (step && sf_last) begin
        out_valid <= 1'b1;
        out_fold  <= nf;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  weight_mem #(
    .PE(PE), .NF(NF), .SF(SF), .WORD_W(SIMD*WBITS)
  ) u_wmem (
    .clk(clk), .we(w_we), .wslot(w_slot), .wsf(w_sf), .wdata(w_data),
    .rnf(nf), .rsf(sf), .rdata(w_all)
  );

  threshold_mem #(
    .PE(PE), .NF(NF), .NUM_TH(NUM_TH), .TH_W(TH_W)
  ) u_thmem (
    .clk(clk), .we(th_we), .wslot(th_slot), .widx(th_idx), .wdata(th_data),
    .rnf(nf), .rdata(th_all)
  );

  for (genvar p = 0; p < PE; p++) begin : g_pe
    mvtu_pe #(
      .SIMD(SIMD), .WBITS(WBITS), .IN_BITS(IN_BITS), .ABITS(ABITS),
      .MATRIX_W(MATRIX_W), .ACC_W(ACC_W), .TH_W(TH_W), .NUM_TH(NUM_TH)
    ) u_pe (
      .clk(clk), .rst_n(rst_n), .en(step), .sf_first(sf_first), .sf_last(sf_last),
      .w(w_all[p*SIMD*WBITS +: SIMD*WBITS]), .x(x),
      .th(th_all[p*NUM_TH*TH_W +: NUM_TH*TH_W]),
      .act(out_act[p*ABITS +: ABITS])
    );
  end

  // An offered fold stays put until it is taken.
  a_out_stable : assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_act) && $stable(out_fold));

endmodule
