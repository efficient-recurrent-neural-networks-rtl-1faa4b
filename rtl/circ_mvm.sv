// circ_mvm: block-circulant matrix-vector product engine, a = W v.
//
// W is a p x q array of K x K circulant blocks. Block W_ij is held only as
// its spectrum FFT(w_ij) in the lane-banked weight BRAM, and the product is
// formed block by block as
//     a_i = sum_j IFFT( FFT(w_ij) o FFT(v_j) ).
// One run has two phases.
//   1. Input spectra: the q input blocks v_j (K x 12 bits each) are read from
//      an external vector BRAM at cfg_vbase + j, transformed by one forward
//      FFT and cached in a spectrum buffer. Each FFT(v_j) is thus computed
//      once and reused by all p block rows.
//   2. Multiply-accumulate: LANES lanes work on LANES consecutive block rows
//      (a row group g covers rows g*LANES .. g*LANES+LANES-1). Every cycle all
//      lanes read the same FFT(v_j) and their own FFT(w_ij) from weight
//      address cfg_wbase + g*q + j, multiply element-wise, inverse-transform
//      and accumulate; after the q-th block the group's LANES result blocks
//      appear together on out_data with out_valid and out_group = g.
// A run of G = cfg_groups row groups takes about q + G*q + 2*LOGK + 8
// cycles; phase 2 retires LANES circulant blocks per cycle with no bubbles.
// start is accepted only while busy is low; done pulses after the last group.
// Weight memory layout: lane l, address cfg_wbase + g*q + j holds block row
// i = g*LANES + l, column j. The FFT -> multiply -> IFFT -> accumulate chain
// and the pre-stored weight spectra follow the paper; the lane count, the
// caching of input spectra, the schedule and all widths are this design's.
module circ_mvm
  import bc_pkg::*;
#(
  parameter int K      = 16,
  parameter int LANES  = 8,
  parameter int QMAX   = 64,     // largest q (input blocks) per run
  parameter int GMAX   = 32,     // largest number of row groups per run
  parameter int WDEPTH = 1600,   // weight words per lane
  parameter int VAW    = 8,      // vector BRAM address width
  parameter int QW     = $clog2(QMAX + 1),
  parameter int GW     = $clog2(GMAX + 1),
  parameter int WAW    = $clog2(WDEPTH),
  parameter int LW     = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // run control
  input  logic                    start,
  input  logic [VAW-1:0]          cfg_vbase,
  input  logic [QW-1:0]           cfg_q,
  input  logic [GW-1:0]           cfg_groups,
  input  logic [WAW-1:0]          cfg_wbase,
  output logic                    busy,
  output logic                    done,
  // read port of the external vector BRAM (1-cycle latency)
  output logic                    vec_re,
  output logic [VAW-1:0]          vec_raddr,
  input  logic [K*DATA_W-1:0]     vec_rdata,
  // weight loading
  input  logic                    w_we,
  input  logic [LW-1:0]           w_lane,
  input  logic [WAW-1:0]          w_addr,
  input  logic [2*K*SPEC_W-1:0]   w_data,
  // results: LANES blocks of row group out_group
  output logic                    out_valid,
  output logic [GW-1:0]           out_group,
  output data_t                   out_data [LANES][K]
);
  localparam int LOGK = $clog2(K);
  localparam int SW   = 2 * K * SPEC_W;
  localparam int XAW  = (QMAX > 1) ? $clog2(QMAX) : 1;
  localparam int DLY  = 2 + LOGK;   // issue -> IFFT output

  typedef enum logic [2:0] {S_IDLE, S_LOADX, S_WAITX, S_MAC, S_DRAIN} state_t;
  state_t state;

  logic [QW-1:0]  q_r, j_cnt, xw_cnt;
  logic [GW-1:0]  g_max, g_cnt, g_done;
  logic [VAW-1:0] vbase_r;
  logic [WAW-1:0] w_ptr;

  // ---------------- phase 1: input FFTs into the spectrum buffer ----------
  logic                    rd_v;       // vec_rdata valid
  logic signed [DATA_W-1:0] xin_re [K], xin_im [K];
  logic                    xf_v;
  logic signed [SPEC_W-1:0] xf_re [K], xf_im [K];
  logic [SW-1:0]           xf_word;

  for (genvar n = 0; n < K; n++) begin : g_xin
    assign xin_re[n] = vec_rdata[n*DATA_W +: DATA_W];
    assign xin_im[n] = '0;
    assign xf_word[n*SPEC_W +: SPEC_W]         = xf_re[n];
    assign xf_word[(K+n)*SPEC_W +: SPEC_W]     = xf_im[n];
  end

  fft_k #(.K(K), .IN_W(DATA_W), .OUT_W(SPEC_W), .INVERSE(1'b0)) u_fft (
    .clk, .rst_n, .in_valid(rd_v), .in_re(xin_re), .in_im(xin_im),
    .out_valid(xf_v), .out_re(xf_re), .out_im(xf_im));

  logic          x_re;
  logic [SW-1:0] x_word;

  vec_ram #(.WIDTH(SW), .DEPTH(QMAX)) u_xbuf (
    .clk, .we(xf_v), .waddr(XAW'(xw_cnt)), .wdata(xf_word),
    .re(x_re), .raddr(XAW'(j_cnt)), .rdata(x_word));

  // ---------------- control ----------------
  logic issue, iss_first, iss_last;
  assign issue     = (state == S_MAC);
  assign iss_first = (j_cnt == '0);
  assign iss_last  = (j_cnt == q_r - 1'b1);
  assign x_re      = issue;
  assign vec_re    = (state == S_LOADX);
  assign vec_raddr = vbase_r + VAW'(j_cnt);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      j_cnt  <= '0;
      xw_cnt <= '0;
      g_cnt  <= '0;
      w_ptr  <= '0;
      q_r    <= '0;
      g_max  <= '0;
      vbase_r <= '0;
      rd_v   <= 1'b0;
    end else begin
      rd_v <= vec_re;
      if (xf_v) xw_cnt <= xw_cnt + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          q_r     <= cfg_q;
          g_max   <= cfg_groups;
          vbase_r <= cfg_vbase;
          w_ptr   <= cfg_wbase;
          j_cnt   <= '0;
          xw_cnt  <= '0;
          g_cnt   <= '0;
          state   <= S_LOADX;
        end
        S_LOADX: begin
          if (iss_last) begin
            j_cnt <= '0;
            state <= S_WAITX;
          end else j_cnt <= j_cnt + 1'b1;
        end
        S_WAITX: if (xw_cnt == q_r) state <= S_MAC;
        S_MAC: begin
          w_ptr <= w_ptr + 1'b1;
          if (iss_last) begin
            j_cnt <= '0;
            g_cnt <= g_cnt + 1'b1;
            if (g_cnt == g_max - 1'b1) state <= S_DRAIN;
          end else j_cnt <= j_cnt + 1'b1;
        end
        S_DRAIN: if (g_done == g_max) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- phase 2: LANES multiply / IFFT / accumulate lanes ------
  logic [SW-1:0] w_word [LANES];

  weight_bram #(.K(K), .LANES(LANES), .DEPTH(WDEPTH)) u_wmem (
    .clk, .we(w_we), .wr_lane(w_lane), .waddr(w_addr), .wdata(w_data),
    .re(issue), .raddr(w_ptr), .rdata(w_word));

  // sideband: valid/first/last/group from issue to IFFT output
  logic          sb_v     [DLY+1];
  logic          sb_first [DLY+1];
  logic          sb_last  [DLY+1];
  logic [GW-1:0] sb_g     [DLY+1];
  assign sb_v[0]     = issue;
  assign sb_first[0] = iss_first;
  assign sb_last[0]  = iss_last;
  assign sb_g[0]     = g_cnt;
  for (genvar d = 0; d < DLY; d++) begin : g_sb
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) sb_v[d+1] <= 1'b0;
      else        sb_v[d+1] <= sb_v[d];
    end
    always_ff @(posedge clk) begin
      sb_first[d+1] <= sb_first[d];
      sb_last[d+1]  <= sb_last[d];
      sb_g[d+1]     <= sb_g[d];
    end
  end

  logic signed [SPEC_W-1:0] xs_re [K], xs_im [K];
  for (genvar n = 0; n < K; n++) begin : g_xs
    assign xs_re[n] = x_word[n*SPEC_W +: SPEC_W];
    assign xs_im[n] = x_word[(K+n)*SPEC_W +: SPEC_W];
  end

  logic lane_ov [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [SPEC_W-1:0] ws_re [K], ws_im [K];
    // the IFFT of a real circulant product is real: its imaginary part (ii)
    // is rounding noise only and is left unused
    logic signed [PROD_W-1:0] pr [K], pim [K], ir [K], ii [K];
    logic                     pv, iv;
    for (genvar n = 0; n < K; n++) begin : g_ws
      assign ws_re[n] = w_word[l][n*SPEC_W +: SPEC_W];
      assign ws_im[n] = w_word[l][(K+n)*SPEC_W +: SPEC_W];
    end
    cmul_array #(.K(K)) u_cmul (
      .clk, .rst_n, .in_valid(sb_v[1]), .a_re(ws_re), .a_im(ws_im),
      .b_re(xs_re), .b_im(xs_im), .out_valid(pv), .p_re(pr), .p_im(pim));
    fft_k #(.K(K), .IN_W(PROD_W), .OUT_W(PROD_W), .INVERSE(1'b1)) u_ifft (
      .clk, .rst_n, .in_valid(pv), .in_re(pr), .in_im(pim),
      .out_valid(iv), .out_re(ir), .out_im(ii));
    accum #(.K(K), .IN_W(PROD_W)) u_acc (
      .clk, .rst_n, .in_valid(iv), .first(sb_first[DLY]), .last(sb_last[DLY]),
      .din(ir), .out_valid(lane_ov[l]), .dout(out_data[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_group <= '0;
      g_done    <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (sb_v[DLY] && sb_last[DLY]) out_group <= sb_g[DLY];
      if (state == S_IDLE && start) g_done <= '0;
      else if (lane_ov[0]) begin
        g_done <= g_done + 1'b1;
      end
      if (state == S_DRAIN && g_done == g_max) done <= 1'b1;
    end
  end
  assign out_valid = lane_ov[0];

  initial begin
    assert (LANES >= 1) else $error("circ_mvm: LANES must be at least 1");
  end
  property p_start_idle;
    @(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE;
  endproperty
  a_start_idle: assert property (p_start_idle)
    else $error("circ_mvm: start while busy");

endmodule
