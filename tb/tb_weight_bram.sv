// tb_weight_bram: checks the lane-banked weight memory. Each bank is filled
// with its own random words through the single write port; reads at one
// address must return every bank's own word one cycle later, and a write to
// one bank must leave the other banks unchanged.
module tb_weight_bram;
  import bc_pkg::*;
  localparam int K = 4, LANES = 4, DEPTH = 20, AW = 5, LW = 2, WORD = 2 * K * SPEC_W;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [LW-1:0] wr_lane = '0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WORD-1:0] wdata = '0;
  logic [WORD-1:0] rdata [LANES];

  weight_bram #(.K(K), .LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [WORD-1:0] model [LANES][DEPTH];

  function automatic logic [WORD-1:0] rword();
    logic [WORD-1:0] w;
    for (int i = 0; i < WORD / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  task automatic read_all(int a);
    re = 1; raddr = AW'(a);
    @(negedge clk);
    re = 0;
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (rdata[l] !== model[l][a]) begin
        failures++; $display("lane %0d addr %0d mismatch", l, a);
      end
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < LANES; l++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        we = 1; wr_lane = LW'(l); waddr = AW'(a); wdata = rword();
        model[l][a] = wdata;
      end
    @(negedge clk) we = 0;
    for (int a = 0; a < DEPTH; a++) read_all(a);
    // overwrite one bank only
    for (int k = 0; k < 8; k++) begin
      automatic int l = $urandom_range(LANES - 1);
      automatic int a = $urandom_range(DEPTH - 1);
      we = 1; wr_lane = LW'(l); waddr = AW'(a); wdata = rword();
      model[l][a] = wdata;
      @(negedge clk) we = 0;
      read_all(a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
