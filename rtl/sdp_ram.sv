// sdp_ram: simple dual-port RAM (one write port, one read port), the
// "RAMS2P" memories that hold the matrices M in the accelerator.
//
// Written as an array so synthesis maps it to block RAM. Write: we/waddr/
// wdata on a rising edge. Read: raddr sampled on a rising edge, rdata valid
// after that edge (one cycle latency). A read of the address written in the
// same cycle returns the old contents. Contents are not reset. Width and
// depth are parameters; the defaults are a 64-bit word (the paper's M word)
// and the 78 x 15 = 1170 column words of M_1..M_k. The 64-bit word and
// the simple dual-port type follow the published block diagram; depth and
// read behaviour are this design's choices.
module sdp_ram #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 1170,
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
