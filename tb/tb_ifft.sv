// tb_ifft: checks the inverse 16-point FFT (fft_k with INVERSE = 1) against
// a floating-point inverse DFT including the 1/16 factor. Random complex
// 24-bit Q.8 blocks are sent one per cycle; outputs must be within 3/256 of
// the exact values and appear 4 cycles after their input. A round trip of a
// conjugate-symmetric spectrum must give a real result.
module tb_ifft;
  import bc_pkg::*;
  localparam int K = 16, LOGK = 4, NBLK = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, out_valid;
  logic signed [PROD_W-1:0] in_re [K], in_im [K];
  logic signed [PROD_W-1:0] out_re [K], out_im [K];

  fft_k #(.K(K), .IN_W(PROD_W), .OUT_W(PROD_W), .INVERSE(1'b1)) dut (.*);

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
    for (int t = 0; t < K; t++) begin
      automatic real er = 0, ei = 0, gr, gi;
      for (int n = 0; n < K; n++) begin
        automatic real ang = 2.0 * 3.141592653589793 * t * n / K;
        er += xr[nrx][n] * $cos(ang) - xi[nrx][n] * $sin(ang);
        ei += xi[nrx][n] * $cos(ang) + xr[nrx][n] * $sin(ang);
      end
      er /= K; ei /= K;
      gr = $itor(out_re[t]) / 256.0;
      gi = $itor(out_im[t]) / 256.0;
      checks++;
      if ((gr - er) > 3.0/256 || (er - gr) > 3.0/256 || (gi - ei) > 3.0/256 || (ei - gi) > 3.0/256) begin
        failures++;
        $display("blk %0d t %0d: got %f,%fi expected %f,%fi", nrx, t, gr, gi, er, ei);
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
        automatic int vr = rnd(-200000, 200000);
        automatic int vi = rnd(-200000, 200000);
        xr[b][n] = vr / 256.0; xi[b][n] = vi / 256.0;
      end
      if (b == 0) begin
        // conjugate-symmetric spectrum: real time signal
        xi[b][0] = 0; xi[b][K/2] = 0;
        for (int n = 1; n < K/2; n++) begin
          xr[b][K-n] = xr[b][n]; xi[b][K-n] = -xi[b][n];
        end
      end
      for (int n = 0; n < K; n++) begin
        in_re[n] = PROD_W'($rtoi(xr[b][n] * 256.0));
        in_im[n] = PROD_W'($rtoi(xi[b][n] * 256.0));
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
