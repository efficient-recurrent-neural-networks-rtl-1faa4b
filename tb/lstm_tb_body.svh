// Shared body of the block-circulant LSTM layer test benches.
//
// The including module defines K, LANES, N_IN, N_CELL, N_PROJ and NFRAMES,
// then instantiates bc_lstm_top as `dut` on the signals declared here.
// The bench draws random 12-bit circulant weights (first columns), biases,
// peepholes and inputs, computes each weight block's spectrum with a
// floating-point DFT rounded to Q.8, and loads everything through the
// layer's write ports. It then runs NFRAMES frames of one sequence, clears
// the recurrent state, and repeats frame 0. A floating-point model of the
// layer (direct circulant products in floating point, peephole LSTM with the
// same four-segment sigmoid evaluated on Q4.8 arguments, rounding and
// saturation to 12-bit Q4.8 where the hardware stores a value) gives the
// expected y_t; every output must be within TOL of it.
// The restarted frame 0 must reproduce the first output bit for bit.
// Each frame's cycle count is checked against the schedule bound, and the
// bench counts how often each mechanism ran: state clear, gate pass,
// element-wise groups, m_t write-backs, projection pass, y_t beats and
// frames that used a non-zero recurrent input.

  localparam int QX  = (N_IN + K - 1) / K;
  localparam int QY  = N_PROJ / K;
  localparam int HB  = N_CELL / K;
  localparam int GB  = 4 * HB / LANES;
  localparam int PG  = QY / LANES;
  localparam int CPG = LANES / 4;
  localparam int E   = CPG * K;
  localparam int QG  = QX + QY;
  localparam int WDEPTH = GB * QG + PG * HB;
  localparam int VDEPTH = QX + QY + HB;
  localparam int VAW = $clog2(VDEPTH);
  localparam int WAW = $clog2(WDEPTH);
  localparam int LW  = (LANES > 1) ? $clog2(LANES) : 1;
  localparam int GAW = (GB > 1) ? $clog2(GB) : 1;
  localparam int FRAME_BOUND = QG + GB * QG + HB + PG * HB + 60;
  // tolerance: one-LSB rounding differences in m_t add up over the N_CELL
  // terms of each projected output, so the bound grows with sqrt(N_CELL)
  localparam real TOL = 0.015 + 0.025 * $sqrt(N_CELL / 128.0);
  // weight ranges (in 1/256) scaled with the fan-in so that gate
  // pre-activations and outputs stay of order one at every size
  localparam int RG = $rtoi(600.0 / $sqrt(QG * K));
  localparam int RP = $rtoi(1600.0 / $sqrt(N_CELL));

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                    w_we = 0;
  logic [LW-1:0]           w_lane = '0;
  logic [WAW-1:0]          w_addr = '0;
  logic [2*K*bc_pkg::SPEC_W-1:0] w_data = '0;
  logic                    b_we = 0;
  logic [GAW-1:0]          b_addr = '0;
  logic [4*E*bc_pkg::DATA_W-1:0] b_data = '0;
  logic                    p_we = 0;
  logic [GAW-1:0]          p_addr = '0;
  logic [3*E*bc_pkg::DATA_W-1:0] p_data = '0;
  logic                    x_we = 0;
  logic [VAW-1:0]          x_addr = '0;
  logic [K*bc_pkg::DATA_W-1:0] x_data = '0;
  logic                    clear_state = 0, start = 0;
  logic                    busy, frame_done, y_valid;
  logic [VAW-1:0]          y_addr;
  logic [K*bc_pkg::DATA_W-1:0] y_data;

  int checks = 0, failures = 0;
  int n_clear = 0, n_gate_pass = 0, n_elem = 0, n_mwb = 0, n_proj_pass = 0;
  int n_ybeats = 0, n_recur = 0;

  // model state, all as real numbers in units of 1.0
  real wg [4*HB][QG][K];          // gate weights, first column of each block
  real wp [QY][HB][K];            // projection weights
  real bias [4][N_CELL];
  real peep [3][N_CELL];
  real xin  [NFRAMES][QX*K];
  real y_ref [N_PROJ], c_ref [N_CELL];
  int  y_hw [N_PROJ];
  int  y_first [N_PROJ];
  real cos_t [K], sin_t [K];

  function automatic int rnd(int lo, int hi);
    int r;
    r = $urandom_range(hi - lo);
    return r + lo;
  endfunction
  function automatic int q8(real v);
    return $rtoi($floor(v * 256.0 + 0.5));
  endfunction
  function automatic real qs(real v);    // round to Q.8 and saturate to 12 bits
    int q;
    q = q8(v);
    if (q > 2047) q = 2047;
    if (q < -2048) q = -2048;
    return q / 256.0;
  endfunction
  function automatic real sg(real v);
    real z, s;
    z = (v < 0) ? -v : v;
    if (z >= 5.0) s = 1.0;
    else if (z >= 2.375) s = 0.03125 * z + 0.84375;
    else if (z >= 1.0) s = 0.125 * z + 0.625;
    else s = 0.25 * z + 0.5;
    return (v < 0) ? 1.0 - s : s;
  endfunction
  function automatic real th(real v);
    return 2.0 * sg(2.0 * v) - 1.0;
  endfunction
  // the same approximation on a Q4.8 argument with the integer shifts of
  // the hardware (a value of 1.0 is 256): the model's activations then round
  // exactly as the layer's do
  function automatic real sgq(real v);
    int z, m, s;
    z = q8(v);
    m = (z < 0) ? -z : z;
    if (m >= 1280) s = 256;
    else if (m >= 608) s = (m >> 5) + 216;
    else if (m >= 256) s = (m >> 3) + 160;
    else s = (m >> 2) + 128;
    if (z < 0) s = 256 - s;
    return s / 256.0;
  endfunction
  function automatic real thq(real v);
    return 2.0 * sgq(2.0 * v) - 1.0;
  endfunction
  function automatic real absr(real v);
    return (v < 0) ? -v : v;
  endfunction

  // spectrum word of one circulant block, from its first column
  task automatic put_block(int lane, int addr, real col[K]);
    logic [2*K*bc_pkg::SPEC_W-1:0] word;
    for (int f = 0; f < K; f++) begin
      real re, im;
      re = 0; im = 0;
      for (int n = 0; n < K; n++) begin
        re += col[n] * cos_t[(f * n) % K];
        im -= col[n] * sin_t[(f * n) % K];
      end
      word[f*bc_pkg::SPEC_W +: bc_pkg::SPEC_W]     = bc_pkg::SPEC_W'(q8(re));
      word[(K+f)*bc_pkg::SPEC_W +: bc_pkg::SPEC_W] = bc_pkg::SPEC_W'(q8(im));
    end
    @(negedge clk);
    w_we = 1; w_lane = LW'(lane); w_addr = WAW'(addr); w_data = word;
    @(negedge clk);
    w_we = 0;
  endtask

  task automatic load_all();
    for (int f = 0; f < K; f++) begin
      cos_t[f] = $cos(2.0 * 3.141592653589793 * f / K);
      sin_t[f] = $sin(2.0 * 3.141592653589793 * f / K);
    end
    for (int i = 0; i < 4 * HB; i++)
      for (int j = 0; j < QG; j++) begin
        for (int n = 0; n < K; n++) wg[i][j][n] = rnd(-RG, RG) / 256.0;
        put_block(i % LANES, (i / LANES) * QG + j, wg[i][j]);
      end
    for (int i = 0; i < QY; i++)
      for (int j = 0; j < HB; j++) begin
        for (int n = 0; n < K; n++) wp[i][j][n] = rnd(-RP, RP) / 256.0;
        put_block(i % LANES, GB * QG + (i / LANES) * HB + j, wp[i][j]);
      end
    // biases and peepholes, one gate group per word
    for (int g = 0; g < GB; g++) begin
      @(negedge clk);
      for (int gt = 0; gt < 4; gt++)
        for (int c = 0; c < E; c++) begin
          int v;
          v = rnd(-64, 64);
          bias[gt][g*E + c] = v / 256.0;
          b_data[(gt*E + c)*bc_pkg::DATA_W +: bc_pkg::DATA_W] = bc_pkg::DATA_W'(v);
        end
      for (int pt = 0; pt < 3; pt++)
        for (int c = 0; c < E; c++) begin
          int v;
          v = rnd(-128, 128);
          peep[pt][g*E + c] = v / 256.0;
          p_data[(pt*E + c)*bc_pkg::DATA_W +: bc_pkg::DATA_W] = bc_pkg::DATA_W'(v);
        end
      b_we = 1; b_addr = GAW'(g); p_we = 1; p_addr = GAW'(g);
      @(negedge clk);
      b_we = 0; p_we = 0;
    end
  endtask

  // floating-point model of one frame
  task automatic model_frame(int t);
    real v [QG*K];
    real a [4*N_CELL];
    real m [N_CELL];
    for (int n = 0; n < QX * K; n++) v[n] = xin[t][n];
    for (int n = 0; n < N_PROJ; n++) v[QX*K + n] = y_ref[n];
    for (int i = 0; i < 4 * HB; i++)
      for (int r = 0; r < K; r++) begin
        real s;
        s = 0;
        for (int j = 0; j < QG; j++)
          for (int c = 0; c < K; c++) s += wg[i][j][(r - c + K) % K] * v[j*K + c];
        // block row i = 4*h + gate
        a[(i % 4) * N_CELL + (i / 4) * K + r] = qs(s);
      end
    for (int n = 0; n < N_CELL; n++) begin
      real ig, fg, gg, og, cn;
      ig = sgq(qs(a[n] + bias[0][n] + peep[0][n] * c_ref[n]));
      fg = sgq(qs(a[N_CELL + n] + bias[1][n] + peep[1][n] * c_ref[n]));
      gg = thq(qs(a[2*N_CELL + n] + bias[2][n]));
      cn = qs(fg * c_ref[n] + ig * gg);
      og = sgq(qs(a[3*N_CELL + n] + bias[3][n] + peep[2][n] * cn));
      c_ref[n] = cn;
      m[n] = qs(og * thq(cn));
    end
    for (int i = 0; i < QY; i++)
      for (int r = 0; r < K; r++) begin
        real s;
        s = 0;
        for (int j = 0; j < HB; j++)
          for (int c = 0; c < K; c++) s += wp[i][j][(r - c + K) % K] * m[j*K + c];
        y_ref[i*K + r] = qs(s);
      end
  endtask

  task automatic write_x(int t);
    for (int b = 0; b < QX; b++) begin
      @(negedge clk);
      x_we = 1; x_addr = VAW'(b);
      for (int c = 0; c < K; c++) x_data[c*bc_pkg::DATA_W +: bc_pkg::DATA_W] = bc_pkg::DATA_W'(q8(xin[t][b*K + c]));
    end
    @(negedge clk);
    x_we = 0;
  endtask

  task automatic do_clear();
    @(negedge clk);
    clear_state = 1;
    @(negedge clk);
    clear_state = 0;
    while (busy) @(negedge clk);
    n_clear++;
    for (int n = 0; n < N_PROJ; n++) y_ref[n] = 0;
    for (int n = 0; n < N_CELL; n++) c_ref[n] = 0;
  endtask

  task automatic run_frame(int t, bit compare_first);
    int cyc, nonzero;
    nonzero = 0;
    for (int n = 0; n < N_PROJ; n++) if (y_ref[n] != 0) nonzero = 1;
    if (nonzero) n_recur++;
    nonzero = 0;
    write_x(t);
    model_frame(t);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!frame_done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc > FRAME_BOUND) begin failures++; $display("frame %0d took %0d cycles, bound %0d", t, cyc, FRAME_BOUND); end
    $display("frame %0d: %0d cycles", t, cyc);
    begin
      real maxe, maxy;
      maxe = 0; maxy = 0;
      for (int n = 0; n < N_PROJ; n++) begin
        if (absr(y_ref[n]) > maxy) maxy = absr(y_ref[n]);
        if (absr(y_hw[n] / 256.0 - y_ref[n]) > maxe) maxe = absr(y_hw[n] / 256.0 - y_ref[n]);
      end
      $display("frame %0d: largest |y| %f, largest error %f", t, maxy, maxe);
    end
    for (int n = 0; n < N_PROJ; n++) if (y_hw[n] != 0) nonzero++;
    checks++;
    if (nonzero < N_PROJ / 4) begin failures++; $display("frame %0d: output nearly all zero", t); end
    for (int n = 0; n < N_PROJ; n++) begin
      real got;
      got = y_hw[n] / 256.0;
      checks++;
      if (absr(got - y_ref[n]) > TOL) begin
        failures++;
        if (failures < 20) $display("frame %0d y[%0d] = %f expected %f", t, n, got, y_ref[n]);
      end
      if (compare_first) begin
        checks++;
        if (y_hw[n] != y_first[n]) begin failures++; $display("restart differs at y[%0d]", n); end
      end
    end
    // the next frame's model starts from the layer's own y_t, so that model
    // and hardware do not drift apart through the recurrence
    for (int n = 0; n < N_PROJ; n++) y_ref[n] = y_hw[n] / 256.0;
  endtask

  // collect y_t beats and count mechanisms
  always @(posedge clk) if (rst_n) begin
    if (y_valid) begin
      n_ybeats++;
      for (int c = 0; c < K; c++)
        y_hw[int'(y_addr)*K + c] = int'($signed(y_data[c*bc_pkg::DATA_W +: bc_pkg::DATA_W]));
    end
    if (dut.e_start && !busy) n_gate_pass++;
    if (dut.e_start && busy) n_proj_pass++;
    if (dut.el_ov) n_elem++;
    if (dut.ser_busy && !dut.ser_proj) n_mwb++;
  end

  initial begin
    repeat (4 * (4 * HB * QG + QY * HB) + (NFRAMES + 2) * (FRAME_BOUND + QX + 20) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < NFRAMES; t++)
      for (int n = 0; n < QX * K; n++) xin[t][n] = (n < N_IN) ? rnd(-384, 384) / 256.0 : 0.0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_all();
    do_clear();
    for (int t = 0; t < NFRAMES; t++) begin
      run_frame(t, 1'b0);
      if (t == 0) y_first = y_hw;
    end
    do_clear();
    run_frame(0, 1'b1);
    // every mechanism must have run
    checks += 7;
    if (n_clear == 0)     begin failures++; $display("state clear never ran"); end
    if (n_gate_pass == 0) begin failures++; $display("gate pass never ran"); end
    if (n_elem != (NFRAMES + 1) * GB) begin failures++; $display("element-wise groups %0d", n_elem); end
    if (n_mwb != (NFRAMES + 1) * HB) begin failures++; $display("m write-back beats %0d", n_mwb); end
    if (n_proj_pass != NFRAMES + 1) begin failures++; $display("projection passes %0d", n_proj_pass); end
    if (n_ybeats != (NFRAMES + 1) * QY) begin failures++; $display("y beats %0d", n_ybeats); end
    if (n_recur == 0)     begin failures++; $display("no frame used a recurrent input"); end
    $display("clears=%0d gate_passes=%0d elem_groups=%0d m_writebacks=%0d proj_passes=%0d y_beats=%0d recurrent_frames=%0d",
             n_clear, n_gate_pass, n_elem, n_mwb, n_proj_pass, n_ybeats, n_recur);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
