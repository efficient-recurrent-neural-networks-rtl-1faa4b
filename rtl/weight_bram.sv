// weight_bram: banked block RAM holding the pre-stored weight spectra.
//
// Each circulant block W_ij is kept only as the spectrum FFT(w_ij): K complex
// values of SPEC_W bits each (real parts in the low half of the word, element
// n at bits [n*SPEC_W +: SPEC_W], imaginary parts above them). There is one
// bank per parallel lane; all banks are read at the same address in the same
// cycle, so LANES block spectra come out together one cycle after re. A
// loader writes one bank at a time through wr_lane/waddr/wdata. Storing the
// FFT of each circulant vector in BRAM is the paper's; banking by lane and
// the word layout are this design's.
module weight_bram
  import bc_pkg::*;
#(
  parameter int K     = 16,
  parameter int LANES = 8,
  parameter int DEPTH = 1600,
  parameter int AW    = $clog2(DEPTH),
  parameter int LW    = (LANES > 1) ? $clog2(LANES) : 1,
  parameter int WORD  = 2 * K * SPEC_W
) (
  input  logic            clk,
  input  logic            we,
  input  logic [LW-1:0]   wr_lane,
  input  logic [AW-1:0]   waddr,
  input  logic [WORD-1:0] wdata,
  input  logic            re,
  input  logic [AW-1:0]   raddr,
  output logic [WORD-1:0] rdata [LANES]
);
  for (genvar l = 0; l < LANES; l++) begin : g_bank
    logic [WORD-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && wr_lane == LW'(l)) mem[waddr] <= wdata;
      if (re) rdata[l] <= mem[raddr];
    end
  end

endmodule
