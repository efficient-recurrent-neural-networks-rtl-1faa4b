// tb_vec_ram: checks the simple dual-port RAM. Random words are written to
// every address, then read back with the one-cycle latency; a read of the
// address being written in the same cycle must return the old word, and
// the output must hold while re is low.
module tb_vec_ram;
  localparam int WIDTH = 40, DEPTH = 24, AW = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;

  vec_ram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model [DEPTH];

  task automatic chk(logic [WIDTH-1:0] e, string what);
    checks++;
    if (rdata !== e) begin failures++; $display("%s: got %h expected %h", what, rdata, e); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = {$urandom, $urandom};
      model[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int a = DEPTH - 1; a >= 0; a--) begin
      re = 1; raddr = AW'(a);
      @(negedge clk);
      chk(model[a], "read");
    end
    // hold
    re = 0; raddr = 0;
    repeat (2) @(negedge clk);
    chk(model[0], "hold");
    // read during write of the same address
    for (int k = 0; k < 10; k++) begin
      automatic int a = $urandom_range(DEPTH - 1);
      we = 1; waddr = AW'(a); wdata = {$urandom, $urandom};
      re = 1; raddr = AW'(a);
      @(negedge clk);
      chk(model[a], "read-during-write");
      model[a] = wdata;
      we = 0;
      @(negedge clk);
      chk(model[a], "read after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
