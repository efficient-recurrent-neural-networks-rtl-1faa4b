// vec_ram: simple dual-port block RAM (one write port, one read port).
//
// Stores DEPTH words of WIDTH bits. A write happens on the clock edge where
// we is high; a read returns the word at raddr one cycle after re is high
// (registered output, as a block RAM does), and the output holds its value
// while re is low. A read and a write of the same address in one cycle return
// the old word. This design uses it for every on-chip vector memory: input
// features and the recurrent output, bias, peephole weights, cell state and
// the cached input spectra. The paper keeps x and b in block RAM; the port
// arrangement and read latency are this design's.
module vec_ram #(
  parameter int WIDTH = 192,
  parameter int DEPTH = 64,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
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
