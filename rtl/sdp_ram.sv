// sdp_ram: simple dual-port RAM, one write port and one read port, one clock.
//
// Used for the weight store (one word = the filter codes of LANES input
// channels for one output channel) and for the batch-normalisation parameter
// store. Writes take effect at the clock edge; a read returns the word at
// raddr one cycle after re is high (the output holds otherwise), as a block
// RAM does. Reading an address that is written in the same cycle returns the
// old word. Contents are not reset.
//
// Origin: on-chip weight storage is part of the published design; its size,
// width and read-before-write behaviour are this design's choices.
module sdp_ram #(
  parameter int unsigned WIDTH = 320,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
