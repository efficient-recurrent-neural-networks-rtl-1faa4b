// bc_lstm_top: one block-circulant LSTM layer with peepholes and a recurrent
// projection (LSTMP), computing one time step (frame) per start pulse.
//
// For input x_t (N_IN values) and the previous projected output y_{t-1}
// (N_PROJ values) a frame computes
//   a    = W_g [x_t ; y_{t-1}]          4*N_CELL gate pre-activations
//   m_t, c_t = lstm_elem(a, b, peepholes, c_{t-1})
//   y_t  = W_p m_t                      N_PROJ outputs
// Both matrices are block-circulant with block size K and are multiplied by
// the same circ_mvm engine, one after the other: first the gate matrix
// (4*N_CELL x (QX+QY)*K), then the projection matrix (N_PROJ x N_CELL).
// The vector BRAM holds, in K-value words, x_t at words 0..QX-1 (N_IN is
// zero-padded up to QX*K), y_{t-1} at QX..QX+QY-1 and m_t at QX+QY onward.
//
// Gate rows are stored interleaved per cell block: block row i = 4*h + gt
// holds gate gt (0 = input, 1 = forget, 2 = candidate, 3 = output) of cells
// h*K .. h*K+K-1. A row group of LANES block rows therefore carries all four
// gates of LANES/4 cell blocks, and each group result is passed straight to
// lstm_elem (E = LANES/4*K cells) while the engine continues with the next
// group. Bias, peephole and cell-state memories are indexed by that group
// number. The m_t blocks and, in the projection pass, the y_t blocks are
// written back into the vector BRAM one block per cycle by a small
// serialiser; y_t is also streamed out on y_valid/y_addr/y_data.
//
// Interface: weights, biases and peepholes are loaded through their write
// ports while the layer is idle. clear_state zeroes y and c (start of a
// sequence). Write the QX input blocks with x_we, pulse start, and wait for
// frame_done; y_t leaves during the projection pass. The frame takes about
// (QX+QY) + GB*(QX+QY) + HB + PG*HB + 60 cycles (1750 at the defaults).
//
// From the paper: block-circulant weights stored as FFT spectra, the
// FFT-multiply-IFFT-accumulate product, 12-bit fixed point, a layer of 1024
// cells with peepholes and a 512-wide projection, block size 16 (8 is the
// other size the paper builds). This design's own choices: the input width
// 153, the lane count, the gate interleaving, the memory map, the schedule,
// the activation approximation and the load/clear interface.
module bc_lstm_top
  import bc_pkg::*;
#(
  parameter int K      = 16,
  parameter int LANES  = 8,
  parameter int N_IN   = 153,
  parameter int N_CELL = 1024,
  parameter int N_PROJ = 512,
  // derived sizes
  parameter int QX     = (N_IN + K - 1) / K,     // input blocks
  parameter int QY     = N_PROJ / K,             // projection blocks
  parameter int HB     = N_CELL / K,             // cell blocks
  parameter int GB     = 4 * HB / LANES,         // gate row groups
  parameter int PG     = QY / LANES,             // projection row groups
  parameter int CPG    = LANES / 4,              // cell blocks per gate group
  parameter int E      = CPG * K,                // cells per gate group
  parameter int QG     = QX + QY,                // gate matrix column blocks
  parameter int WDEPTH = GB * QG + PG * HB,      // weight words per lane
  parameter int VDEPTH = QX + QY + HB,           // vector BRAM words
  parameter int VAW    = $clog2(VDEPTH),
  parameter int WAW    = $clog2(WDEPTH),
  parameter int LW     = (LANES > 1) ? $clog2(LANES) : 1,
  parameter int GAW    = (GB > 1) ? $clog2(GB) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight spectra loading: lane, word address, K complex values
  input  logic                    w_we,
  input  logic [LW-1:0]           w_lane,
  input  logic [WAW-1:0]          w_addr,
  input  logic [2*K*SPEC_W-1:0]   w_data,
  // gate biases of one gate group: [gate][E]
  input  logic                    b_we,
  input  logic [GAW-1:0]          b_addr,
  input  logic [4*E*DATA_W-1:0]   b_data,
  // peephole weights of one gate group: [input, forget, output][E]
  input  logic                    p_we,
  input  logic [GAW-1:0]          p_addr,
  input  logic [3*E*DATA_W-1:0]   p_data,
  // input frame, one K-value block at a time
  input  logic                    x_we,
  input  logic [VAW-1:0]          x_addr,
  input  logic [K*DATA_W-1:0]     x_data,
  // control
  input  logic                    clear_state,
  input  logic                    start,
  output logic                    busy,
  output logic                    frame_done,
  // projected output y_t, one block per beat
  output logic                    y_valid,
  output logic [VAW-1:0]          y_addr,
  output logic [K*DATA_W-1:0]     y_data
);
  localparam int MB   = QX + QY;                 // first m_t word
  localparam int QMAX = (QG > HB) ? QG : HB;
  localparam int GMAX = (GB > PG) ? GB : PG;
  localparam int QW   = $clog2(QMAX + 1);
  localparam int GW   = $clog2(GMAX + 1);
  localparam int KW   = K * DATA_W;

  initial begin
    assert (LANES % 4 == 0 && (4 * HB) % LANES == 0 && QY % LANES == 0)
      else $error("bc_lstm_top: LANES must divide the gate and projection row blocks and be a multiple of 4");
    assert (QG >= LANES && HB >= LANES)
      else $error("bc_lstm_top: the write-back serialiser needs q >= LANES");
  end

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_GATES, S_PROJ} state_t;
  state_t state;

  // ---------------- vector BRAM ----------------
  logic           v_we;
  logic [VAW-1:0] v_waddr;
  logic [KW-1:0]  v_wdata;
  logic           e_vre;
  logic [VAW-1:0] e_vraddr;
  logic [KW-1:0]  v_rdata;

  vec_ram #(.WIDTH(KW), .DEPTH(VDEPTH)) u_vbuf (
    .clk, .we(v_we), .waddr(v_waddr), .wdata(v_wdata),
    .re(e_vre), .raddr(e_vraddr), .rdata(v_rdata));

  // ---------------- block-circulant product engine ----------------
  logic            e_start, e_busy, e_done, e_ov;
  logic [VAW-1:0]  e_vbase;
  logic [QW-1:0]   e_q;
  logic [GW-1:0]   e_groups, e_og;
  logic [WAW-1:0]  e_wbase;
  data_t           e_out [LANES][K];

  circ_mvm #(.K(K), .LANES(LANES), .QMAX(QMAX), .GMAX(GMAX), .WDEPTH(WDEPTH),
             .VAW(VAW)) u_mvm (
    .clk, .rst_n, .start(e_start), .cfg_vbase(e_vbase), .cfg_q(e_q),
    .cfg_groups(e_groups), .cfg_wbase(e_wbase), .busy(e_busy), .done(e_done),
    .vec_re(e_vre), .vec_raddr(e_vraddr), .vec_rdata(v_rdata),
    .w_we, .w_lane, .w_addr, .w_data,
    .out_valid(e_ov), .out_group(e_og), .out_data(e_out));

  // ---------------- bias / peephole / cell-state memories ----------------
  logic [4*E*DATA_W-1:0] bias_word;
  logic [3*E*DATA_W-1:0] peep_word;
  logic [E*DATA_W-1:0]   c_word, c_wdata;
  logic                  c_we;
  logic [GAW-1:0]        c_waddr;
  logic                  g_ov;          // gate-group result valid (gates pass)

  assign g_ov = e_ov && (state == S_GATES);

  vec_ram #(.WIDTH(4*E*DATA_W), .DEPTH(GB)) u_bias (
    .clk, .we(b_we), .waddr(b_addr), .wdata(b_data),
    .re(g_ov), .raddr(GAW'(e_og)), .rdata(bias_word));
  vec_ram #(.WIDTH(3*E*DATA_W), .DEPTH(GB)) u_peep (
    .clk, .we(p_we), .waddr(p_addr), .wdata(p_data),
    .re(g_ov), .raddr(GAW'(e_og)), .rdata(peep_word));
  vec_ram #(.WIDTH(E*DATA_W), .DEPTH(GB)) u_cell (
    .clk, .we(c_we), .waddr(c_waddr), .wdata(c_wdata),
    .re(g_ov), .raddr(GAW'(e_og)), .rdata(c_word));

  // ---------------- element-wise LSTM ----------------
  logic        r_v;                     // engine result registered
  logic [GW-1:0] r_g;
  data_t       r_out [LANES][K];
  data_t a_i [E], a_f [E], a_g [E], a_o [E];
  data_t b_i [E], b_f [E], b_g [E], b_o [E];
  data_t p_i [E], p_f [E], p_o [E], c_prev [E];
  data_t m_new [E], c_new [E];
  logic  el_ov;
  logic [GW-1:0] el_g [3];

  logic [2:0] el_pipe;                  // groups inside lstm_elem
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_v     <= 1'b0;
      el_pipe <= '0;
    end else begin
      r_v     <= g_ov;
      el_pipe <= {el_pipe[1:0], r_v};
    end
  end
  always_ff @(posedge clk) begin
    if (e_ov) begin
      r_out <= e_out;
      r_g   <= e_og;
    end
    el_g[0] <= r_g;
    el_g[1] <= el_g[0];
    el_g[2] <= el_g[1];
  end

  for (genvar cb = 0; cb < CPG; cb++) begin : g_cb
    for (genvar r = 0; r < K; r++) begin : g_r
      localparam int C = cb * K + r;
      assign a_i[C] = r_out[4*cb + 0][r];
      assign a_f[C] = r_out[4*cb + 1][r];
      assign a_g[C] = r_out[4*cb + 2][r];
      assign a_o[C] = r_out[4*cb + 3][r];
    end
  end
  for (genvar c = 0; c < E; c++) begin : g_unpack
    assign b_i[c]    = bias_word[(0*E + c)*DATA_W +: DATA_W];
    assign b_f[c]    = bias_word[(1*E + c)*DATA_W +: DATA_W];
    assign b_g[c]    = bias_word[(2*E + c)*DATA_W +: DATA_W];
    assign b_o[c]    = bias_word[(3*E + c)*DATA_W +: DATA_W];
    assign p_i[c]    = peep_word[(0*E + c)*DATA_W +: DATA_W];
    assign p_f[c]    = peep_word[(1*E + c)*DATA_W +: DATA_W];
    assign p_o[c]    = peep_word[(2*E + c)*DATA_W +: DATA_W];
    assign c_prev[c] = c_word[c*DATA_W +: DATA_W];
  end

  lstm_elem #(.E(E)) u_elem (
    .clk, .rst_n, .in_valid(r_v),
    .a_i, .a_f, .a_g, .a_o, .b_i, .b_f, .b_g, .b_o, .p_i, .p_f, .p_o,
    .c_prev, .out_valid(el_ov), .m_out(m_new), .c_out(c_new));

  // ---------------- write-back serialiser ----------------
  logic [KW-1:0]  ser_data [LANES];
  logic [VAW-1:0] ser_base;
  logic [LW:0]    ser_n, ser_cnt;
  logic           ser_busy, ser_proj;
  assign ser_busy = (ser_cnt != ser_n);

  logic [VAW:0]   clr_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ser_n    <= '0;
      ser_cnt  <= '0;
      ser_base <= '0;
      ser_proj <= 1'b0;
    end else begin
      if (el_ov) begin
        // m_t blocks of one gate group
        for (int cb = 0; cb < CPG; cb++)
          for (int r = 0; r < K; r++)
            ser_data[cb][r*DATA_W +: DATA_W] <= m_new[cb*K + r];
        ser_base <= VAW'(MB) + VAW'(el_g[2]) * VAW'(CPG);
        ser_n    <= (LW+1)'(CPG);
        ser_cnt  <= '0;
        ser_proj <= 1'b0;
      end else if (e_ov && state == S_PROJ) begin
        // y_t blocks of one projection group
        for (int l = 0; l < LANES; l++)
          for (int r = 0; r < K; r++)
            ser_data[l][r*DATA_W +: DATA_W] <= e_out[l][r];
        ser_base <= VAW'(QX) + VAW'(e_og) * VAW'(LANES);
        ser_n    <= (LW+1)'(LANES);
        ser_cnt  <= '0;
        ser_proj <= 1'b1;
      end else if (ser_busy) begin
        ser_cnt <= ser_cnt + 1'b1;
      end
    end
  end

  // vector BRAM write port: serialiser, state clearing, or host input
  always_comb begin
    v_we    = 1'b0;
    v_waddr = x_addr;
    v_wdata = x_data;
    if (ser_busy) begin
      v_we    = 1'b1;
      v_waddr = ser_base + VAW'(ser_cnt);
      v_wdata = ser_data[ser_cnt[LW-1:0]];
    end else if (state == S_CLEAR) begin
      v_we    = (clr_cnt < (VAW+1)'(QY));
      v_waddr = VAW'(QX) + VAW'(clr_cnt);
      v_wdata = '0;
    end else if (x_we) begin
      v_we    = 1'b1;
    end
  end

  assign y_valid = ser_busy && ser_proj;
  assign y_addr  = v_waddr - VAW'(QX);
  assign y_data  = v_wdata;

  // cell state write-back (or clearing)
  always_comb begin
    c_we    = el_ov;
    c_waddr = GAW'(el_g[2]);
    for (int c = 0; c < E; c++) c_wdata[c*DATA_W +: DATA_W] = c_new[c];
    if (state == S_CLEAR) begin
      c_we    = (clr_cnt < (VAW+1)'(GB));
      c_waddr = GAW'(clr_cnt);
      c_wdata = '0;
    end
  end

  // ---------------- frame sequencer ----------------
  logic pending, done_seen;
  assign pending = e_busy || r_v || el_pipe != '0 || ser_busy;

  always_comb begin
    e_start  = 1'b0;
    e_vbase  = '0;
    e_q      = QW'(QG);
    e_groups = GW'(GB);
    e_wbase  = '0;
    if (state == S_IDLE && start && !clear_state) e_start = 1'b1;
    if (state == S_GATES && done_seen && !pending) begin
      e_start  = 1'b1;
      e_vbase  = VAW'(MB);
      e_q      = QW'(HB);
      e_groups = GW'(PG);
      e_wbase  = WAW'(GB * QG);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      done_seen  <= 1'b0;
      frame_done <= 1'b0;
      clr_cnt    <= '0;
    end else begin
      frame_done <= 1'b0;
      if (e_done) done_seen <= 1'b1;
      unique case (state)
        S_IDLE: begin
          done_seen <= 1'b0;
          if (clear_state) begin
            clr_cnt <= '0;
            state   <= S_CLEAR;
          end else if (start) state <= S_GATES;
        end
        S_CLEAR: begin
          clr_cnt <= clr_cnt + 1'b1;
          if (clr_cnt >= (VAW+1)'(QY) && clr_cnt >= (VAW+1)'(GB)) state <= S_IDLE;
        end
        S_GATES: if (done_seen && !pending) begin
          done_seen <= 1'b0;
          state     <= S_PROJ;
        end
        S_PROJ: if (done_seen && !pending) begin
          frame_done <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
  assign busy = (state != S_IDLE);

  // ---------------- interface rules ----------------
  a_x_idle: assert property (@(posedge clk) disable iff (!rst_n)
                             x_we |-> state == S_IDLE && !ser_busy)
    else $error("bc_lstm_top: input written while a frame is running");
  a_ser_free: assert property (@(posedge clk) disable iff (!rst_n)
                               (el_ov || (e_ov && state == S_PROJ)) |-> !ser_busy)
    else $error("bc_lstm_top: write-back serialiser overrun");

endmodule
