// replica_voter: selective channel replication (selective TMR) voter.
//
// Only the channels whose failure costs most accuracy are triplicated: the
// paper computes each such channel three times and votes. Here each logical
// output channel o reads its value from slot src0[o] of the collected slot
// vector or, when tmr[o] is set, takes the bitwise two-out-of-three majority
// of slots src0[o], src1[o] and src2[o], so one faulty replica is outvoted.
// The channel map is written at run time, which also lets a reordered
// channel-to-PE schedule be read back in channel order (in the paper such a
// reorder is absorbed into the next layer's weights instead). After reset
// the map is the identity without replication.
//
// Interface: cfg_we writes entry cfg_ch; in_valid/in_ready/in_vec (slot s
// at [s*ABITS +: ABITS]); out_valid/out_ready/out_vec (channel o at
// [o*ABITS +: ABITS]). Timing: one register stage, one vector per cycle.
module replica_voter
  import qnn_pkg::*;
#(
  parameter int unsigned OUT_CH = 64,
  parameter int unsigned SLOTS  = 96,
  parameter int unsigned ABITS  = 1,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned CH_W   = (OUT_CH > 1) ? $clog2(OUT_CH) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [CH_W-1:0]          cfg_ch,
  input  logic [SLOT_W-1:0]        cfg_src0,
  input  logic [SLOT_W-1:0]        cfg_src1,
  input  logic [SLOT_W-1:0]        cfg_src2,
  input  logic                     cfg_tmr,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [SLOTS*ABITS-1:0]   in_vec,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [OUT_CH*ABITS-1:0]  out_vec
);

  logic [SLOT_W-1:0]        src0 [OUT_CH];
  logic [SLOT_W-1:0]        src1 [OUT_CH];
  logic [SLOT_W-1:0]        src2 [OUT_CH];
  logic [OUT_CH-1:0]        tmr;
  logic [OUT_CH*ABITS-1:0]  voted;

  function automatic logic [ABITS-1:0] pick(input logic [SLOT_W-1:0] s,
                                            input logic [SLOTS*ABITS-1:0] v);
    return (int'(s) < SLOTS) ? v[int'(s)*ABITS +: ABITS] : '0;
  endfunction

  always_comb begin
    for (int o = 0; o < OUT_CH; o++) begin
      logic [ABITS-1:0] a, b, c;
      a = pick(src0[o], in_vec);
      b = pick(src1[o], in_vec);
      c = pick(src2[o], in_vec);
      voted[o*ABITS +: ABITS] = tmr[o] ? ABITS'(majority3(32'(a), 32'(b), 32'(c))) : a;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int o = 0; o < OUT_CH; o++) begin
        src0[o] <= SLOT_W'(o);
        src1[o] <= SLOT_W'(o);
        src2[o] <= SLOT_W'(o);
      end
      tmr <= '0;
    end else if (cfg_we && int'(cfg_ch) < OUT_CH) begin
      src0[cfg_ch] <= cfg_src0;
      src1[cfg_ch] <= cfg_src1;
      src2[cfg_ch] <= cfg_src2;
      tmr[cfg_ch]  <= cfg_tmr;
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_vec   <= '0;
    end else if (in_valid && in_ready) begin
      out_valid <= 1'b1;
      out_vec   <= voted;
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

endmodule
