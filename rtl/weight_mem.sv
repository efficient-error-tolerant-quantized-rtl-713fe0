// weight_mem: on-chip weight store of the processing-element array.
//
// Every output slot (slot = nf*PE + pe: the channel computed by PE pe in
// neuron fold nf) owns SF words of SIMD weights, one per synapse fold. The
// read side returns, for one (nf, sf) pair, the words of all PE slots of
// that fold at once, which is what the PE array consumes per cycle. Keeping
// the parameters on chip follows the paper; so does the idea that changing
// the channel-to-PE schedule only means placing the weights differently,
// which the host does through the write port.
//
// The array has one synchronous write port and a combinational read, and no
// reset: the host loads it before use (organisation and ports are this
// design's choice).
module weight_mem #(
  parameter int unsigned PE     = 32,
  parameter int unsigned NF     = 3,
  parameter int unsigned SF     = 1,
  parameter int unsigned WORD_W = 27,
  localparam int unsigned SLOTS  = PE * NF,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned NF_W   = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned SF_W   = (SF > 1) ? $clog2(SF) : 1
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [SLOT_W-1:0]    wslot,
  input  logic [SF_W-1:0]      wsf,
  input  logic [WORD_W-1:0]    wdata,
  input  logic [NF_W-1:0]      rnf,
  input  logic [SF_W-1:0]      rsf,
  output logic [PE*WORD_W-1:0] rdata
);

  logic [WORD_W-1:0] mem [SLOTS][SF];

  always_ff @(posedge clk) begin
    if (we && int'(wslot) < SLOTS) mem[wslot][wsf] <= wdata;
  end

  always_comb begin
    for (int p = 0; p < PE; p++) begin
      rdata[p*WORD_W +: WORD_W] = mem[int'(rnf) * PE + p][rsf];
    end
  end

endmodule
