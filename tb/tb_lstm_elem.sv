// tb_lstm_elem: checks the element-wise peephole LSTM update against a
// floating-point model of the same equations (with the four-segment
// sigmoid, tanh(x) = 2 sigmoid(2x) - 1). Random pre-activations, biases,
// peepholes and cell states for E = 8 cells enter back to back; m_t and c_t
// must be within 0.04 of the model and leave exactly 3 cycles after input.
module tb_lstm_elem;
  import bc_pkg::*;
  localparam int E = 8, NB = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  data_t a_i [E], a_f [E], a_g [E], a_o [E];
  data_t b_i [E], b_f [E], b_g [E], b_o [E];
  data_t p_i [E], p_f [E], p_o [E], c_prev [E];
  data_t m_out [E], c_out [E];

  lstm_elem #(.E(E)) dut (.*);

  int checks = 0, failures = 0, nrx = 0, cyc = 0;
  real em [NB][E], ec [NB][E];
  int sent [NB];

  function automatic int rnd(int lo, int hi);
    int r;
    r = $urandom_range(hi - lo);
    return r + lo;
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
  function automatic real absr(real v);
    return (v < 0) ? -v : v;
  endfunction

  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int e = 0; e < E; e++) begin
      checks += 2;
      if (absr($itor(m_out[e]) / 256.0 - em[nrx][e]) > 0.04) begin
        failures++; $display("blk %0d cell %0d m %f expected %f", nrx, e, $itor(m_out[e]) / 256.0, em[nrx][e]);
      end
      if (absr($itor(c_out[e]) / 256.0 - ec[nrx][e]) > 0.04) begin
        failures++; $display("blk %0d cell %0d c %f expected %f", nrx, e, $itor(c_out[e]) / 256.0, ec[nrx][e]);
      end
    end
    checks++;
    if (cyc - sent[nrx] != 4) begin failures++; $display("latency %0d", cyc - sent[nrx]); end
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
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      for (int e = 0; e < E; e++) begin
        real ri, rf, rg, ro, rbi, rbf, rbg, rbo, rpi, rpf, rpo, rc, ig, fg, gg, og, cn;
        a_i[e] = DATA_W'(rnd(-768, 768)); a_f[e] = DATA_W'(rnd(-768, 768));
        a_g[e] = DATA_W'(rnd(-768, 768)); a_o[e] = DATA_W'(rnd(-768, 768));
        b_i[e] = DATA_W'(rnd(-128, 128)); b_f[e] = DATA_W'(rnd(-128, 128));
        b_g[e] = DATA_W'(rnd(-128, 128)); b_o[e] = DATA_W'(rnd(-128, 128));
        p_i[e] = DATA_W'(rnd(-128, 128)); p_f[e] = DATA_W'(rnd(-128, 128));
        p_o[e] = DATA_W'(rnd(-128, 128)); c_prev[e] = DATA_W'(rnd(-512, 512));
        ri = $itor(a_i[e]) / 256; rf = $itor(a_f[e]) / 256; rg = $itor(a_g[e]) / 256; ro = $itor(a_o[e]) / 256;
        rbi = $itor(b_i[e]) / 256; rbf = $itor(b_f[e]) / 256; rbg = $itor(b_g[e]) / 256; rbo = $itor(b_o[e]) / 256;
        rpi = $itor(p_i[e]) / 256; rpf = $itor(p_f[e]) / 256; rpo = $itor(p_o[e]) / 256;
        rc = $itor(c_prev[e]) / 256;
        ig = sg(ri + rbi + rpi * rc);
        fg = sg(rf + rbf + rpf * rc);
        gg = th(rg + rbg);
        cn = fg * rc + ig * gg;
        og = sg(ro + rbo + rpo * cn);
        ec[b][e] = cn;
        em[b][e] = og * th(cn);
      end
      in_valid = 1;
      sent[b] = cyc;
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (nrx != NB) begin failures++; $display("received %0d", nrx); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
