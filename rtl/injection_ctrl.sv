// injection_ctrl: stuck-at error injector working through the thresholds.
//
// A neuron's output can be fixed to any activation value by overwriting its
// thresholds: a threshold of +TH_MAX is never exceeded and one of -TH_MAX is
// always exceeded, so forcing k thresholds to -TH_MAX and the rest to +TH_MAX
// makes the threshold count equal k whatever the accumulation is. This
// module turns a command into the corresponding threshold writes, as the
// paper does for its channel stuck-at campaigns. Two targets are supported:
// INJ_SLOT forces one output slot (one channel), INJ_PE forces every slot
// that processing element cmd_target computes (slots pe, PE+pe, ...), which
// models a single faulty PE under folding. The fault-free thresholds are
// restored by the host rewriting them; the injector keeps no copy.
//
// Interface and timing (this design's choice): a command is accepted with
// cmd_valid && cmd_ready; busy is high while the writes go out, one
// threshold per cycle on th_we/th_slot/th_idx/th_data, NUM_TH writes for a
// slot and NF*NUM_TH for a PE. cmd_ready is low while busy.
module injection_ctrl
  import qnn_pkg::*;
#(
  parameter int unsigned PE     = 32,
  parameter int unsigned NF     = 3,
  parameter int unsigned ABITS  = 1,
  parameter int unsigned TH_W   = 14,
  localparam int unsigned NUM_TH = num_thresholds(ABITS),
  localparam int unsigned SLOTS  = PE * NF,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned NF_W   = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned TIDX_W = (NUM_TH > 1) ? $clog2(NUM_TH) : 1,
  localparam int unsigned CNT_W  = $clog2(NUM_TH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  inj_mode_e         cmd_mode,
  input  logic [SLOT_W-1:0] cmd_target,
  input  logic [ABITS-1:0]  cmd_value,
  output logic              th_we,
  output logic [SLOT_W-1:0] th_slot,
  output logic [TIDX_W-1:0] th_idx,
  output logic [TH_W-1:0]   th_data,
  output logic              busy
);

  localparam logic [TH_W-1:0] TH_MAX = {1'b0, {(TH_W-1){1'b1}}};

  inj_mode_e         mode;
  logic [SLOT_W-1:0] target;
  logic [CNT_W-1:0]  k;       // thresholds forced to -TH_MAX
  logic [NF_W-1:0]   fold;
  logic [TIDX_W-1:0] idx;
  logic              last_idx, last_fold;

  assign cmd_ready = !busy;
  assign th_we     = busy;
  assign th_slot   = (mode == INJ_PE) ? SLOT_W'(int'(fold) * PE + int'(target)) : target;
  assign th_idx    = idx;
  assign th_data   = (CNT_W'(idx) < k) ? -TH_MAX : TH_MAX;
  assign last_idx  = (int'(idx) == NUM_TH - 1);
  assign last_fold = (mode == INJ_SLOT) || (int'(fold) == NF - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      mode   <= INJ_SLOT;
      target <= '0;
      k      <= '0;
      fold   <= '0;
      idx    <= '0;
    end else if (!busy) begin
      if (cmd_valid) begin
        busy   <= 1'b1;
        mode   <= cmd_mode;
        target <= cmd_target;
        k      <= CNT_W'(stuck_count(ABITS, 32'(cmd_value)));
        fold   <= '0;
        idx    <= '0;
      end
    end else begin
      if (last_idx) begin
        idx <= '0;
        if (last_fold) busy <= 1'b0;
        else           fold <= fold + 1'b1;
      end else begin
        idx <= idx + 1'b1;
      end
    end
  end

endmodule
