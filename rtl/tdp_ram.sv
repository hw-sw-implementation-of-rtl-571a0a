// tdp_ram: true dual-port RAM, the "RAMT2P" memories that hold result
// matrices E.
//
// Two independent ports A and B, each able to read or write in a cycle.
// Reads have one cycle latency (read-first: a port that writes returns
// the old word). The same address written by both ports in one cycle is
// undefined, as in block RAM; the accelerator never does this. Defaults:
// a 60-bit column word and 15 words, one 15 x 15 matrix over F_16.
// The four result memories of the published block diagram are named as
// true dual-port RAMs; their port behaviour is this design's choice.
module tdp_ram #(
  parameter int unsigned WIDTH = 60,
  parameter int unsigned DEPTH = 15,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  input  logic             b_en,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
    if (b_en) begin
      b_rdata <= mem[b_addr];
      if (b_we) mem[b_addr] <= b_wdata;
    end
  end
endmodule
