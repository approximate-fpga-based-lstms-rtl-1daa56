// tb_lstm_top: end-to-end test of the LSTM accelerator at reduced size.
// R=32, C=64, TR=4, NZ=8, TC=2: the dot product (4 tiles) is faster than
// the u multiplier array (8 tiles), so the hand-off between them stalls.
// Five time steps with 1..4 refinement steps, a new sequence at the first
// and the last step, random gaps on every input stream and random
// back-pressure on the output. See lstm_top_tb_body.svh for the checks.
module tb_lstm_top;
  import lstm_pkg::*;
  import tb_fp_pkg::*;
  localparam int unsigned R = 32, C = 64, NZ = 8, TR = 4, TC = 2, SW = 16;
  localparam int unsigned NT = 5;
  localparam bit STALLS = 1;
  localparam int STEPS [NT] = '{2, 4, 1, 3, 2};

  lstm_top #(.R(R), .C(C), .NZ(NZ), .TR(TR), .TC(TC), .STEPS_W(SW)) dut (.*);

  `include "lstm_top_tb_body.svh"
endmodule
