// lstm_elem: element-wise part of an LSTM cell with peephole connections.
//
// For E cells at once it takes the four gate pre-activations produced by the
// block-circulant products (W_x x_t + W_r y_{t-1}, one value per gate and
// cell), the gate biases, the three peephole weights and the previous cell
// state, and computes
//   i  = sigmoid(a_i + b_i + p_i * c_{t-1})
//   f  = sigmoid(a_f + b_f + p_f * c_{t-1})
//   g  = tanh   (a_g + b_g)
//   c_t = f * c_{t-1} + i * g
//   o  = sigmoid(a_o + b_o + p_o * c_t)
//   m_t = o * tanh(c_t)
// the peephole LSTM that the paper's models use. Three pipeline stages: a
// result appears with out_valid three cycles after in_valid, and a new set
// of E cells can enter every cycle. All values are 12-bit Q4.8, every sum
// and product is rounded and saturated to that format. The equations are
// the standard peephole LSTM the paper refers to; the pipelining, the
// fixed-point handling and the PLAN activations (act_unit) are this
// design's.
module lstm_elem
  import bc_pkg::*;
#(
  parameter int E = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t a_i [E], a_f [E], a_g [E], a_o [E],
  input  data_t b_i [E], b_f [E], b_g [E], b_o [E],
  input  data_t p_i [E], p_f [E], p_o [E],
  input  data_t c_prev [E],
  output logic  out_valid,
  output data_t m_out [E],
  output data_t c_out [E]
);
  logic [2:0] vld;

  for (genvar e = 0; e < E; e++) begin : g_cell
    data_t zi, zf, zg, si, sf, tg;
    data_t s1_i, s1_f, s1_g, s1_c, s1_ao, s1_po;
    data_t s2_c, s2_ao, s2_po;
    data_t zo, so, tc;

    // stage 1: input, forget and candidate gates
    always_comb begin
      zi = sat_data(48'(a_i[e]) + 48'(b_i[e]) + qmul(24'(p_i[e]), 24'(c_prev[e])));
      zf = sat_data(48'(a_f[e]) + 48'(b_f[e]) + qmul(24'(p_f[e]), 24'(c_prev[e])));
      zg = sat_data(48'(a_g[e]) + 48'(b_g[e]));
    end
    act_unit #(.IS_TANH(1'b0)) u_si (.x(zi), .y(si));
    act_unit #(.IS_TANH(1'b0)) u_sf (.x(zf), .y(sf));
    act_unit #(.IS_TANH(1'b1)) u_tg (.x(zg), .y(tg));
    always_ff @(posedge clk) begin
      s1_i  <= si;
      s1_f  <= sf;
      s1_g  <= tg;
      s1_c  <= c_prev[e];
      s1_ao <= sat_data(48'(a_o[e]) + 48'(b_o[e]));
      s1_po <= p_o[e];
    end

    // stage 2: new cell state
    always_ff @(posedge clk) begin
      s2_c  <= sat_data(qmul(24'(s1_f), 24'(s1_c)) + qmul(24'(s1_i), 24'(s1_g)));
      s2_ao <= s1_ao;
      s2_po <= s1_po;
    end

    // stage 3: output gate (peephole on the new state) and cell output
    assign zo = sat_data(48'(s2_ao) + qmul(24'(s2_po), 24'(s2_c)));
    act_unit #(.IS_TANH(1'b0)) u_so (.x(zo), .y(so));
    act_unit #(.IS_TANH(1'b1)) u_tc (.x(s2_c), .y(tc));
    always_ff @(posedge clk) begin
      m_out[e] <= sat_data(qmul(24'(so), 24'(tc)));
      c_out[e] <= s2_c;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[1:0], in_valid};
  end
  assign out_valid = vld[2];

endmodule
