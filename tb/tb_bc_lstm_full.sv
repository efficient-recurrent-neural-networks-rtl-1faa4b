// tb_bc_lstm_full: end-to-end test of the LSTM layer at its full default
// size (block size 16, 8 lanes, 153 inputs, 1024 cells, 512 projected
// outputs), over 2 frames plus a restart. The test itself is in
// lstm_tb_body.svh; the layer keeps all its default parameters.
module tb_bc_lstm_full;
  localparam int K = 16, LANES = 8, N_IN = 153, N_CELL = 1024, N_PROJ = 512, NFRAMES = 2;
  `include "lstm_tb_body.svh"
  bc_lstm_top dut (.*);
endmodule
