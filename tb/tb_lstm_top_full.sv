// tb_lstm_top_full: end-to-end test of the LSTM accelerator at its default
// size (R=512, C=1024, NZ=512, TR=32, TC=1). Three time steps of a sequence
// with 2, 3 and 1 refinement steps and no input stalls, so the gate phase
// is timed against n_steps*(NZ/TC+1) + R/TR; the output side still applies
// random back-pressure. See lstm_top_tb_body.svh for the checks.
module tb_lstm_top_full;
  import lstm_pkg::*;
  import tb_fp_pkg::*;
  localparam int unsigned R = 512, C = 1024, NZ = 512, TR = 32, TC = 1, SW = 16;
  localparam int unsigned NT = 3;
  localparam bit STALLS = 0;
  localparam int STEPS [NT] = '{2, 3, 1};

  lstm_top dut (.*);

  `include "lstm_top_tb_body.svh"
endmodule
