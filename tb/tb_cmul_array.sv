// tb_cmul_array: checks the element-wise complex multiplier. Random 16-bit
// Q.8 spectra are multiplied one block per cycle; each product must equal
// the exactly computed complex product rounded to Q.12 (within one LSB) and
// arrive one cycle after its input. Large operands check the saturation.
module tb_cmul_array;
  import bc_pkg::*;
  localparam int K = 16, NBLK = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic signed [SPEC_W-1:0] a_re [K], a_im [K], b_re [K], b_im [K];
  logic signed [PROD_W-1:0] p_re [K], p_im [K];

  cmul_array #(.K(K)) dut (.*);

  int checks = 0, failures = 0, nrx = 0, cyc = 0;
  longint er [NBLK][K], ei [NBLK][K];
  int sent [NBLK];

  function automatic int rnd(int lo, int hi);
    int r;
    r = $urandom_range(hi - lo);
    return r + lo;
  endfunction
  function automatic longint clip(longint v);
    if (v > 64'sd134217727) return 64'sd134217727;
    if (v < -64'sd134217728) return -64'sd134217728;
    return v;
  endfunction

  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int n = 0; n < K; n++) begin
      longint dr, di;
      dr = longint'(p_re[n]) - er[nrx][n];
      di = longint'(p_im[n]) - ei[nrx][n];
      checks++;
      if (dr > 1 || dr < -1 || di > 1 || di < -1) begin
        failures++;
        $display("blk %0d n %0d: got %0d,%0d expected %0d,%0d", nrx, n, p_re[n], p_im[n], er[nrx][n], ei[nrx][n]);
      end
    end
    checks++;
    if (cyc - sent[nrx] != 2) begin failures++; $display("latency"); end
    nrx++;
  end

  initial begin
    repeat (500) @(posedge clk);
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
        automatic int lim = (b < 3) ? 32767 : 4000;
        automatic int ar = rnd(-lim, lim), ai = rnd(-lim, lim);
        automatic int br = rnd(-lim, lim), bi = rnd(-lim, lim);
        a_re[n] = SPEC_W'(ar); a_im[n] = SPEC_W'(ai);
        b_re[n] = SPEC_W'(br); b_im[n] = SPEC_W'(bi);
        er[b][n] = clip($rtoi($floor((real'(ar) * br - real'(ai) * bi) / 16.0 + 0.5)));
        ei[b][n] = clip($rtoi($floor((real'(ar) * bi + real'(ai) * br) / 16.0 + 0.5)));
      end
      in_valid = 1;
      sent[b] = cyc;
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (nrx != NBLK) begin failures++; $display("received %0d", nrx); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
