// qnn_layer_top: one error-tolerant quantized neural network layer.
//
// A matrix-vector threshold unit (mvtu) computes PE*NF output slots per input
// vector with PE processing elements folded NF times. The slots hold the
// layer's OUT_CH channels plus the extra copies of channels chosen for
// selective triplication. A fold collector assembles the slots of one output
// pixel and the replica voter maps them back to OUT_CH channels, taking a
// two-out-of-three majority for triplicated channels. Stuck-at errors are
// injected by the injection controller, which overwrites thresholds of one
// slot or of every slot of one PE. Fault-aware scheduling is applied by the
// host: it decides which slot (and so which PE) computes each channel,
// places weights and thresholds accordingly and writes the voter's channel
// map. The structure follows the paper; the ports, the handshakes and the
// single threshold write port shared by host and injector are this
// design's choices.
//
// Interface: host writes to the weight store (host_w_*), to the threshold
// store (host_th_*, accepted only when host_th_ready, i.e. while the
// injector is idle), injection commands (inj_*), channel map entries
// (map_*), the input stream (in_*, SIMD inputs per word, MATRIX_W/SIMD words
// per vector) and the output stream (out_*, OUT_CH activations per vector).
// Timing: one output vector per NF*MATRIX_W/SIMD cycles in steady state;
// out_valid of a vector rises NF*SF + 2 clock edges after the edge that
// takes its first input word (NF*SF words, then the collector and the voter
// register each add one edge).
module qnn_layer_top
  import qnn_pkg::*;
#(
  parameter int unsigned PE       = 32,
  parameter int unsigned NF       = 3,
  parameter int unsigned OUT_CH   = 64,
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
  localparam int unsigned TIDX_W  = (NUM_TH > 1) ? $clog2(NUM_TH) : 1,
  localparam int unsigned CH_W    = (OUT_CH > 1) ? $clog2(OUT_CH) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // weight store
  input  logic                     host_w_we,
  input  logic [SLOT_W-1:0]        host_w_slot,
  input  logic [SF_W-1:0]          host_w_sf,
  input  logic [SIMD*WBITS-1:0]    host_w_data,
  // threshold store
  input  logic                     host_th_we,
  output logic                     host_th_ready,
  input  logic [SLOT_W-1:0]        host_th_slot,
  input  logic [TIDX_W-1:0]        host_th_idx,
  input  logic [TH_W-1:0]          host_th_data,
  // stuck-at injection
  input  logic                     inj_valid,
  output logic                     inj_ready,
  input  inj_mode_e                inj_mode,
  input  logic [SLOT_W-1:0]        inj_target,
  input  logic [ABITS-1:0]         inj_value,
  // channel map / replication
  input  logic                     map_we,
  input  logic [CH_W-1:0]          map_ch,
  input  logic [SLOT_W-1:0]        map_src0,
  input  logic [SLOT_W-1:0]        map_src1,
  input  logic [SLOT_W-1:0]        map_src2,
  input  logic                     map_tmr,
  // input activations
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [SIMD*IN_BITS-1:0]  in_data,
  // output activations
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [OUT_CH*ABITS-1:0]  out_act
);

  if (OUT_CH > SLOTS) begin : g_bad_ch
    $error("OUT_CH must not exceed PE*NF");
  end

  logic                    inj_busy, inj_we;
  logic [SLOT_W-1:0]       inj_slot, th_slot;
  logic [TIDX_W-1:0]       inj_idx, th_idx;
  logic [TH_W-1:0]         inj_data, th_data;
  logic                    th_we;

  logic                    fold_valid, fold_ready;
  logic [NF_W-1:0]         fold_idx;
  logic [PE*ABITS-1:0]     fold_act;
  logic                    vec_valid, vec_ready;
  logic [SLOTS*ABITS-1:0]  vec;

  injection_ctrl #(
    .PE(PE), .NF(NF), .ABITS(ABITS), .TH_W(TH_W)
  ) u_inj (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid(inj_valid), .cmd_ready(inj_ready), .cmd_mode(inj_mode),
    .cmd_target(inj_target), .cmd_value(inj_value),
    .th_we(inj_we), .th_slot(inj_slot), .th_idx(inj_idx), .th_data(inj_data),
    .busy(inj_busy)
  );

  // The injector owns the threshold write port while it is busy.
  assign host_th_ready = !inj_busy;
  assign th_we   = inj_busy ? inj_we   : host_th_we;
  assign th_slot = inj_busy ? inj_slot : host_th_slot;
  assign th_idx  = inj_busy ? inj_idx  : host_th_idx;
  assign th_data = inj_busy ? inj_data : host_th_data;

  mvtu #(
    .PE(PE), .NF(NF), .SIMD(SIMD), .MATRIX_W(MATRIX_W),
    .WBITS(WBITS), .IN_BITS(IN_BITS), .ABITS(ABITS)
  ) u_mvtu (
    .clk(clk), .rst_n(rst_n),
    .w_we(host_w_we), .w_slot(host_w_slot), .w_sf(host_w_sf), .w_data(host_w_data),
    .th_we(th_we), .th_slot(th_slot), .th_idx(th_idx), .th_data(th_data),
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(fold_valid), .out_ready(fold_ready), .out_fold(fold_idx), .out_act(fold_act)
  );

  fold_collector #(
    .PE(PE), .NF(NF), .ABITS(ABITS)
  ) u_coll (
    .clk(clk), .rst_n(rst_n),
    .in_valid(fold_valid), .in_ready(fold_ready), .in_fold(fold_idx), .in_act(fold_act),
    .out_valid(vec_valid), .out_ready(vec_ready), .out_vec(vec)
  );

  replica_voter #(
    .OUT_CH(OUT_CH), .SLOTS(SLOTS), .ABITS(ABITS)
  ) u_vote (
    .clk(clk), .rst_n(rst_n),
    .cfg_we(map_we), .cfg_ch(map_ch), .cfg_src0(map_src0), .cfg_src1(map_src1),
    .cfg_src2(map_src2), .cfg_tmr(map_tmr),
    .in_valid(vec_valid), .in_ready(vec_ready), .in_vec(vec),
    .out_valid(out_valid), .out_ready(out_ready), .out_vec(out_act)
  );

endmodule
