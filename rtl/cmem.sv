// cmem: channel memory CMEM_i, holding the channel LLRs of one received
// codeword.
//
// N channel LLRs of CH_W bits are stored PAR to a word, N/PAR words deep.
// One write port loads a word; one read port returns a word one cycle after
// its address (synchronous read, as an SRAM would). Written as an array so
// that synthesis may map it to a memory macro.
//
// The design description gives CMEM's job and its count (four, one per
// codeword of MODE-1) and five-bit channel LLRs. The word width PAR and the
// port arrangement are this design's choices; the description does not
// give the organisation of the memory.
module cmem
  import polar_pkg::*;
#(
  parameter int N   = 1024,   // code length
  parameter int PAR = 8,      // LLRs per word (own choice)
  localparam int DEPTH = N / PAR,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic [PAR*CH_W-1:0]  wdata,
  input  logic [AW-1:0]        raddr,
  output logic [PAR*CH_W-1:0]  rdata
);
  logic [PAR*CH_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
