// tb_bc_lstm_top: end-to-end test of the LSTM layer at a reduced size:
// block size 16 and 8 lanes as in the full design, but 20 inputs (padded to
// 32), 128 cells and 128 projected outputs, over 4 frames plus a restart.
// The test itself is in lstm_tb_body.svh.
module tb_bc_lstm_top;
  localparam int K = 16, LANES = 8, N_IN = 20, N_CELL = 128, N_PROJ = 128, NFRAMES = 4;
  `include "lstm_tb_body.svh"
  bc_lstm_top #(.K(K), .LANES(LANES), .N_IN(N_IN), .N_CELL(N_CELL), .N_PROJ(N_PROJ)) dut (.*);
endmodule
