// tb_act_unit: checks the sigmoid and tanh units over every 12-bit input.
// Each output must lie within 1/256 of the four-segment approximation
// computed here in floating point, within 0.025 (sigmoid) and 0.05 (tanh)
// of the exact functions, and the functions must be monotonic.
module tb_act_unit;
  import bc_pkg::*;
  data_t x, ys, yt;
  act_unit #(.IS_TANH(1'b0)) u_sig (.x(x), .y(ys));
  act_unit #(.IS_TANH(1'b1)) u_tanh (.x(x), .y(yt));

  int checks = 0, failures = 0;

  function automatic real plan(real v);
    real z, s;
    z = (v < 0) ? -v : v;
    if (z >= 5.0) s = 1.0;
    else if (z >= 2.375) s = 0.03125 * z + 0.84375;
    else if (z >= 1.0) s = 0.125 * z + 0.625;
    else s = 0.25 * z + 0.5;
    return (v < 0) ? 1.0 - s : s;
  endfunction

  function automatic real absr(real v);
    return (v < 0) ? -v : v;
  endfunction

  initial begin
    real prev_s, prev_t;
    prev_s = -1; prev_t = -2;
    for (int v = -2048; v < 2048; v++) begin
      real xv, gs, gt, es, et;
      x = DATA_W'(v);
      #1;
      xv = v / 256.0;
      gs = $itor(ys) / 256.0;
      gt = $itor(yt) / 256.0;
      es = plan(xv);
      et = 2.0 * plan(2.0 * xv) - 1.0;
      checks += 4;
      if (absr(gs - es) > 1.0/256) begin failures++; $display("sig(%f)=%f plan %f", xv, gs, es); end
      if (absr(gt - et) > 2.0/256) begin failures++; $display("tanh(%f)=%f plan %f", xv, gt, et); end
      if (absr(gs - 1.0 / (1.0 + $exp(-xv))) > 0.025) begin failures++; $display("sig(%f)=%f far from exact", xv, gs); end
      if (absr(gt - (($exp(xv) - $exp(-xv)) / ($exp(xv) + $exp(-xv)))) > 0.05) begin failures++; $display("tanh(%f)=%f far from exact", xv, gt); end
      checks += 2;
      if (gs < prev_s) begin failures++; $display("sigmoid not monotonic at %f", xv); end
      if (gt < prev_t) begin failures++; $display("tanh not monotonic at %f", xv); end
      prev_s = gs; prev_t = gt;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
