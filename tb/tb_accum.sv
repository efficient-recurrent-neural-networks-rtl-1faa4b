// tb_accum: checks the block accumulator. Rows of q = 1..6 random blocks are
// streamed back to back (first/last flags, no gaps, some idle cycles in
// between); each row sum of Q.12 inputs must equal the exact sum rounded
// to Q.8 and saturated to the 12-bit
// range, and appear once, one cycle after the row's last block.
module tb_accum;
  import bc_pkg::*;
  localparam int K = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, first = 0, last = 0, out_valid;
  logic signed [PROD_W-1:0] din [K];
  data_t dout [K];

  accum #(.K(K), .IN_W(PROD_W)) dut (.*);

  int checks = 0, failures = 0, nrows = 0, nrx = 0;
  int expq [$];
  int exp_vals [64][K];

  function automatic int rnd(int lo, int hi);
    int r;
    r = $urandom_range(hi - lo);
    return r + lo;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int n = 0; n < K; n++) begin
      checks++;
      if (int'(dout[n]) != exp_vals[nrx][n]) begin
        failures++;
        $display("row %0d n %0d: got %0d expected %0d", nrx, n, dout[n], exp_vals[nrx][n]);
      end
    end
    nrx++;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int row = 0; row < 40; row++) begin
      automatic int q = rnd(1, 6);
      automatic int big = (row % 5 == 4);
      longint s [K];
      for (int n = 0; n < K; n++) s[n] = 0;
      for (int j = 0; j < q; j++) begin
        @(negedge clk);
        in_valid = 1; first = (j == 0); last = (j == q - 1);
        for (int n = 0; n < K; n++) begin
          automatic int v = big ? rnd(-48000, 48000) : rnd(-4800, 4800);
          din[n] = PROD_W'(v);
          s[n] += v;
        end
      end
      for (int n = 0; n < K; n++) begin
        automatic longint r = (s[n] + 8) >>> 4;   // Q.12 -> Q.8, rounded
        exp_vals[row][n] = (r > 2047) ? 2047 : (r < -2048) ? -2048 : int'(r);
      end
      nrows++;
      if (row % 7 == 3) begin
        @(negedge clk) in_valid = 0;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (nrx != nrows) begin failures++; $display("rows out %0d of %0d", nrx, nrows); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
