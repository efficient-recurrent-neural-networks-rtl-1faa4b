// fft_k: fully parallel, pipelined K-point radix-2 FFT (or inverse FFT).
//
// This is the FFT/IFFT box of the block-circulant product
// W_ij x_j = IFFT(FFT(w_ij) o FFT(x_j)). All K complex samples enter together,
// and all K results leave together LOGK = log2(K) clock cycles later; a new
// block can be accepted every cycle. The network is decimation in time: the
// inputs are taken in bit-reversed order and each of the LOGK stages holds K/2
// butterflies y0 = x0 + T*x1, y1 = x0 - T*x1 with twiddle T = exp(-+2*pi*i*m/K),
// followed by a pipeline register.
//
// INVERSE = 0: forward transform, no scaling, so the internal word grows by
// one bit per stage. INVERSE = 1: conjugate twiddles and a rounded halving
// after every stage, which gives the 1/K factor of the inverse transform.
// Twiddles are Q1.14 and products are rounded. OUT_W takes the low bits of
// the internal word; the caller picks it large enough for its data range.
//
// The paper gives the transform sizes (block size 8 and 16) and the place of
// the FFT/IFFT in the datapath; the radix-2 pipelined structure, the
// one-block-per-cycle throughput and the number formats are this design's.
module fft_k
  import bc_pkg::*;
#(
  parameter int K       = 16,
  parameter int IN_W    = DATA_W,
  parameter int OUT_W   = SPEC_W,
  parameter bit INVERSE = 1'b0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_re  [K],
  input  logic signed [IN_W-1:0]  in_im  [K],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_re [K],
  output logic signed [OUT_W-1:0] out_im [K]
);
  localparam int LOGK = $clog2(K);
  localparam int IW   = IN_W + LOGK + 1;   // internal word
  localparam int PW   = IW + TW_W + 1;     // twiddle product

  initial begin
    assert (K >= 2 && K <= K_MAX && (1 << LOGK) == K)
      else $error("fft_k: K must be a power of two between 2 and %0d", K_MAX);
  end

  function automatic int bitrev(input int n);
    int r = 0;
    for (int b = 0; b < LOGK; b++) if (n[b]) r |= 1 << (LOGK - 1 - b);
    return r;
  endfunction

  logic signed [IW-1:0] sr [LOGK+1][K];
  logic signed [IW-1:0] si [LOGK+1][K];
  logic [LOGK:0]        vld;

  // stage 0: bit-reversed, sign-extended inputs
  for (genvar n = 0; n < K; n++) begin : g_in
    assign sr[0][n] = IW'(in_re[bitrev(n)]);
    assign si[0][n] = IW'(in_im[bitrev(n)]);
  end
  assign vld[0] = in_valid;

  for (genvar s = 0; s < LOGK; s++) begin : g_stage
    localparam int HALF = 1 << s;
    for (genvar b = 0; b < K/2; b++) begin : g_bfly
      localparam int I0  = (b / HALF) * 2 * HALF + (b % HALF);
      localparam int I1  = I0 + HALF;
      localparam int TWI = (b % HALF) * (K / (2 * HALF)) * (K_MAX / K);
      localparam logic signed [TW_W-1:0] TWR = COS16[TWI];
      // forward: T = cos - i sin ; inverse: T = cos + i sin
      localparam logic signed [TW_W-1:0] TWIM = INVERSE ? SIN16[TWI] : -SIN16[TWI];

      logic signed [PW-1:0] pr, pi;
      logic signed [IW:0]   tr, ti;
      logic signed [IW+1:0] a0r, a0i, a1r, a1i;

      always_comb begin
        pr  = PW'(sr[s][I1]) * PW'(TWR) - PW'(si[s][I1]) * PW'(TWIM);
        pi  = PW'(sr[s][I1]) * PW'(TWIM) + PW'(si[s][I1]) * PW'(TWR);
        tr  = (IW+1)'((pr + (PW'(1) <<< (TW_FRAC - 1))) >>> TW_FRAC);
        ti  = (IW+1)'((pi + (PW'(1) <<< (TW_FRAC - 1))) >>> TW_FRAC);
        a0r = (IW+2)'(sr[s][I0]) + (IW+2)'(tr);
        a0i = (IW+2)'(si[s][I0]) + (IW+2)'(ti);
        a1r = (IW+2)'(sr[s][I0]) - (IW+2)'(tr);
        a1i = (IW+2)'(si[s][I0]) - (IW+2)'(ti);
        if (INVERSE) begin
          a0r = (a0r + 1) >>> 1;
          a0i = (a0i + 1) >>> 1;
          a1r = (a1r + 1) >>> 1;
          a1i = (a1i + 1) >>> 1;
        end
      end

      always_ff @(posedge clk) begin
        sr[s+1][I0] <= a0r[IW-1:0];
        si[s+1][I0] <= a0i[IW-1:0];
        sr[s+1][I1] <= a1r[IW-1:0];
        si[s+1][I1] <= a1i[IW-1:0];
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[s+1] <= 1'b0;
      else        vld[s+1] <= vld[s];
    end
  end

  for (genvar n = 0; n < K; n++) begin : g_out
    assign out_re[n] = OUT_W'(sr[LOGK][n]);
    assign out_im[n] = OUT_W'(si[LOGK][n]);
  end
  assign out_valid = vld[LOGK];

endmodule
