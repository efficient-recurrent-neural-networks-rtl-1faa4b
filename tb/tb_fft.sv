// tb_fft: checks the forward 16-point FFT against a floating-point DFT.
// Random real and complex 12-bit blocks are sent back to back, one per
// cycle; every output bin must be within 4/256 of the exact DFT, and each
// result must appear exactly log2(16) = 4 cycles after its input.
module tb_fft;
  import bc_pkg::*;
  localparam int K = 16, LOGK = 4, NBLK = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, out_valid;
  logic signed [DATA_W-1:0] in_re [K], in_im [K];
  logic signed [SPEC_W-1:0] out_re [K], out_im [K];

  fft_k #(.K(K), .IN_W(DATA_W), .OUT_W(SPEC_W), .INVERSE(1'b0)) dut (.*);

  int checks = 0, failures = 0;
  real xr [NBLK][K], xi [NBLK][K];
  int  sent_cyc [NBLK];
  int  cyc = 0, nrx = 0;

  function automatic int rnd(int lo, int hi);
    int r;
    r = $urandom_range(hi - lo);
    return r + lo;
  endfunction

  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int f = 0; f < K; f++) begin
      automatic real er = 0, ei = 0, gr, gi;
      for (int n = 0; n < K; n++) begin
        automatic real ang = 2.0 * 3.141592653589793 * f * n / K;
        er += xr[nrx][n] * $cos(ang) + xi[nrx][n] * $sin(ang);
        ei += xi[nrx][n] * $cos(ang) - xr[nrx][n] * $sin(ang);
      end
      gr = $itor(out_re[f]) / 256.0;
      gi = $itor(out_im[f]) / 256.0;
      checks++;
      if ((gr - er) > 4.0/256 || (er - gr) > 4.0/256 || (gi - ei) > 4.0/256 || (ei - gi) > 4.0/256) begin
        failures++;
        $display("blk %0d bin %0d: got %f,%fi expected %f,%fi", nrx, f, gr, gi, er, ei);
      end
    end
    checks++;
    // input driven before edge n+1, registered LOGK times, seen at edge n+1+LOGK
    if (cyc - sent_cyc[nrx] != LOGK + 1) begin
      failures++; $display("latency %0d", cyc - sent_cyc[nrx]);
    end
    nrx++;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < NBLK; b++) begin
      @(negedge clk);
      for (int n = 0; n < K; n++) begin
        automatic int vr = (b == 0) ? (n == 0 ? 2047 : 0) : (b == 1 ? 2047 : rnd(-2048, 2047));
        automatic int vi = (b < 4) ? 0 : rnd(-2048, 2047);
        in_re[n] = DATA_W'(vr); in_im[n] = DATA_W'(vi);
        xr[b][n] = vr / 256.0; xi[b][n] = vi / 256.0;
      end
      in_valid = 1;
      sent_cyc[b] = cyc;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (nrx != NBLK) begin failures++; $display("received %0d blocks", nrx); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
