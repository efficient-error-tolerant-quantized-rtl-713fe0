// threshold_mem: per-channel threshold store, writable at run time.
//
// Each output slot (slot = nf*PE + pe) has its own set of NUM_TH thresholds,
// since every output channel has its own folded bias and normalisation. The
// store is written at run time both to load the trained thresholds and to
// inject stuck-at errors by overwriting them, as the paper does. The read
// side returns, for one neuron fold, the thresholds of all PEs at once.
//
// One synchronous write port, combinational read, no reset: the host loads
// it before use (this design's choice). rdata holds PE p, threshold i at
// [(p*NUM_TH + i)*TH_W +: TH_W].
module threshold_mem #(
  parameter int unsigned PE     = 32,
  parameter int unsigned NF     = 3,
  parameter int unsigned NUM_TH = 1,
  parameter int unsigned TH_W   = 14,
  localparam int unsigned SLOTS  = PE * NF,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned NF_W   = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned TIDX_W = (NUM_TH > 1) ? $clog2(NUM_TH) : 1
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [SLOT_W-1:0]           wslot,
  input  logic [TIDX_W-1:0]           widx,
  input  logic [TH_W-1:0]             wdata,
  input  logic [NF_W-1:0]             rnf,
  output logic [PE*NUM_TH*TH_W-1:0]   rdata
);

  logic [TH_W-1:0] mem [SLOTS][NUM_TH];

  always_ff @(posedge clk) begin
    if (we && int'(wslot) < SLOTS) mem[wslot][widx] <= wdata;
  end

  always_comb begin
    for (int p = 0; p < PE; p++) begin
      for (int i = 0; i < NUM_TH; i++) begin
        rdata[(p*NUM_TH + i)*TH_W +: TH_W] = mem[int'(rnf) * PE + p][i];
      end
    end
  end

endmodule
