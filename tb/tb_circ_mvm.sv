// tb_circ_mvm: self-checking test of the block-circulant product engine.
//
// Uses K = 4 and LANES = 2. Run 1 is a 4 x 12 matrix (p = 4, q = 3, two row
// groups) with random circulant blocks and a random input. The test bench
// computes the weight spectra itself with a real-valued DFT, and checks every
// output against the direct circulant product
//   a[i*K+r] = sum_j sum_c w_ij[(r-c) mod K] * v_j[c]
// computed in floating point, within 3/256. Run 2 is the 4 x 4 example
// (first column 1.14 -2.26 0.83 -0.69, input 0.78 -1.11 0.95 0.39, result
// 1.56 -3.36 3.97 -3.16). Both runs also check the cycle count from start to
// done against q + G*q + 2*log2(K) + 8.
module tb_circ_mvm;
  import bc_pkg::*;
  localparam int K = 4, LANES = 2, QMAX = 8, GMAX = 4, WDEPTH = 32, VAW = 5;
  localparam int LOGK = 2;
  localparam int QW = $clog2(QMAX + 1), GW = $clog2(GMAX + 1), WAW = $clog2(WDEPTH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [VAW-1:0] cfg_vbase = '0;
  logic [QW-1:0]  cfg_q = '0;
  logic [GW-1:0]  cfg_groups = '0;
  logic [WAW-1:0] cfg_wbase = '0;
  logic vec_re; logic [VAW-1:0] vec_raddr; logic [K*DATA_W-1:0] vec_rdata;
  logic w_we = 0; logic [0:0] w_lane = '0; logic [WAW-1:0] w_addr = '0;
  logic [2*K*SPEC_W-1:0] w_data = '0;
  logic out_valid; logic [GW-1:0] out_group; data_t out_data [LANES][K];

  circ_mvm #(.K(K), .LANES(LANES), .QMAX(QMAX), .GMAX(GMAX), .WDEPTH(WDEPTH), .VAW(VAW)) dut (.*);

  // vector memory model, 1-cycle read
  logic [K*DATA_W-1:0] vmem [1<<VAW];
  always_ff @(posedge clk) if (vec_re) vec_rdata <= vmem[vec_raddr];

  int checks = 0, failures = 0;
  real wcol [8][8][K];   // [row block][col block][element], first column
  real vin  [8][K];
  real expect_a [8][K];
  int  nout;

  function automatic int rnd(int lo, int hi);
    int r;
    r = $urandom_range(hi - lo);
    return r + lo;
  endfunction

  function automatic int q8(real v);
    return $rtoi(v * 256.0 + (v >= 0 ? 0.5 : -0.5));
  endfunction

  task automatic load_block(int lane, int addr, real col[K]);
    logic [2*K*SPEC_W-1:0] word;
    for (int f = 0; f < K; f++) begin
      real re = 0, im = 0;
      for (int n = 0; n < K; n++) begin
        re += col[n] * $cos(2.0 * 3.141592653589793 * f * n / K);
        im -= col[n] * $sin(2.0 * 3.141592653589793 * f * n / K);
      end
      word[f*SPEC_W +: SPEC_W]     = SPEC_W'(q8(re));
      word[(K+f)*SPEC_W +: SPEC_W] = SPEC_W'(q8(im));
    end
    @(negedge clk);
    w_we = 1; w_lane = 1'(lane); w_addr = WAW'(addr); w_data = word;
    @(negedge clk);
    w_we = 0;
  endtask

  // outputs are checked as they appear
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      for (int l = 0; l < LANES; l++)
        for (int r = 0; r < K; r++) begin
          automatic real got = $itor($signed(out_data[l][r])) / 256.0;
          automatic real e = expect_a[out_group*LANES + l][r];
          checks++;
          if (got - e > 3.0/256 || e - got > 3.0/256) begin
            failures++;
            $display("MISMATCH group %0d lane %0d elem %0d: got %f expected %f", out_group, l, r, got, e);
          end
        end
      nout++;
    end
  end

  task automatic run(int vbase, int q, int groups, int wbase);
    int cyc = 0;
    nout = 0;
    @(negedge clk);
    cfg_vbase = VAW'(vbase); cfg_q = QW'(q); cfg_groups = GW'(groups); cfg_wbase = WAW'(wbase);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc > q + groups*q + 2*LOGK + 8) begin
      failures++; $display("too slow: %0d cycles", cyc);
    end
    checks++;
    if (nout != groups) begin failures++; $display("got %0d result groups, expected %0d", nout, groups); end
    repeat (3) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy after done"); end
  endtask

  initial begin
    // watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- run 1: random 4x3 blocks ----
    for (int j = 0; j < 3; j++) begin
      logic [K*DATA_W-1:0] word;
      for (int c = 0; c < K; c++) begin
        automatic int v = rnd(-512, 511);   // -2 .. +2
        vin[j][c] = v / 256.0;
        word[c*DATA_W +: DATA_W] = DATA_W'(v);
      end
      vmem[j] = word;
    end
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 3; j++) begin
        for (int n = 0; n < K; n++) wcol[i][j][n] = rnd(-100, 100) / 256.0;
        load_block(i % LANES, (i / LANES) * 3 + j, wcol[i][j]);
      end
    for (int i = 0; i < 4; i++)
      for (int r = 0; r < K; r++) begin
        automatic real s = 0;
        for (int j = 0; j < 3; j++)
          for (int c = 0; c < K; c++) s += wcol[i][j][(r - c + K) % K] * vin[j][c];
        expect_a[i][r] = s;
      end
    run(0, 3, 2, 0);
    // ---- run 2: the worked 4x4 example ----
    begin
      real col[K];
      real xv[K];
      logic [K*DATA_W-1:0] word;
      col = '{1.14, -2.26, 0.83, -0.69};
      xv  = '{0.78, -1.11, 0.95, 0.39};
      for (int c = 0; c < K; c++) word[c*DATA_W +: DATA_W] = DATA_W'(q8(xv[c]));
      vmem[10] = word;
      load_block(0, 20, col);
      load_block(1, 20, col);
      expect_a[0] = '{1.56, -3.36, 3.97, -3.16};
      expect_a[1] = '{1.56, -3.36, 3.97, -3.16};
      run(10, 1, 1, 20);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
