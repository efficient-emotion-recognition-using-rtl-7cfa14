// vector_bank - the small local hypervector store of the mapper.
//
// V words of D bits, one write port and two combinational read ports. In
// rule-90 mode it holds the per-modality PFP/NFP pairs (2 x modalities words);
// in hybrid mode it is the burst-refilled bank from which combinatorial pairs
// are drawn. Written as a register array: with V = 7 words the paper's storage
// is far too small for an SRAM macro to pay off (the design's own choice).
//
// Timing: a write on we_i takes effect at the next clock edge; reads are
// asynchronous. The contents are not reset; the mapper writes every word it
// reads before reading it.
module vector_bank #(
  parameter int unsigned D = hdc_pkg::HV_DIM_DEFAULT,
  parameter int unsigned V = 7,
  localparam int unsigned AW = (V > 1) ? $clog2(V) : 1
) (
  input  logic          clk,
  input  logic          we_i,
  input  logic [AW-1:0] waddr_i,
  input  logic [D-1:0]  wdata_i,
  input  logic [AW-1:0] raddr_a_i,
  output logic [D-1:0]  rdata_a_o,
  input  logic [AW-1:0] raddr_b_i,
  output logic [D-1:0]  rdata_b_o
);

  logic [D-1:0] mem [V];

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= wdata_i;
  end

  assign rdata_a_o = mem[raddr_a_i];
  assign rdata_b_o = mem[raddr_b_i];

endmodule
