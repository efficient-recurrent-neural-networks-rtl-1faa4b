// cmul_array: element-wise complex product of two K-element spectra.
//
// Computes p[n] = a[n] * b[n] for n = 0..K-1 in one clock cycle (one
// registered stage), i.e. the FFT(w_ij) o FFT(x_j) term of the
// block-circulant product. Inputs are SPEC_W-bit Q.8 real/imaginary parts;
// each real product sum is rounded to Q.12 and saturated to PROD_W bits.
// K complex multipliers run in parallel, so a whole block is multiplied per
// cycle. The element-wise product is the paper's; the widths, the rounding
// and the single pipeline stage are this design's.
module cmul_array
  import bc_pkg::*;
#(
  parameter int K = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [SPEC_W-1:0] a_re [K],
  input  logic signed [SPEC_W-1:0] a_im [K],
  input  logic signed [SPEC_W-1:0] b_re [K],
  input  logic signed [SPEC_W-1:0] b_im [K],
  output logic                     out_valid,
  output logic signed [PROD_W-1:0] p_re [K],
  output logic signed [PROD_W-1:0] p_im [K]
);
  localparam int MW = 2 * SPEC_W + 1;
  localparam int SH = 2 * FRAC - PROD_FRAC;   // Q.16 product -> Q.12
  localparam logic signed [MW-1:0] PMAX = MW'((64'sd1 <<< (PROD_W - 1)) - 1);
  localparam logic signed [MW-1:0] PMIN = -MW'(64'sd1 <<< (PROD_W - 1));

  function automatic logic signed [PROD_W-1:0] rnd_sat(input logic signed [MW-1:0] v);
    logic signed [MW-1:0] r;
    r = (v + MW'(1 <<< (SH - 1))) >>> SH;
    if (r > PMAX)      return PMAX[PROD_W-1:0];
    else if (r < PMIN) return PMIN[PROD_W-1:0];
    else               return r[PROD_W-1:0];
  endfunction

  for (genvar n = 0; n < K; n++) begin : g_mul
    logic signed [MW-1:0] rr, ii;
    always_comb begin
      rr = MW'(a_re[n]) * MW'(b_re[n]) - MW'(a_im[n]) * MW'(b_im[n]);
      ii = MW'(a_re[n]) * MW'(b_im[n]) + MW'(a_im[n]) * MW'(b_re[n]);
    end
    always_ff @(posedge clk) begin
      p_re[n] <= rnd_sat(rr);
      p_im[n] <= rnd_sat(ii);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
