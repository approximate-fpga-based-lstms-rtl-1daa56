// lstm_controller: sequencer for one LSTM time step.
//
// The source design describes the datapath but no controller; this is the
// simplest sequencer that runs it. On start it
//   1. LOAD : takes x(t) from the host, TR words per beat, into the x part
//             of the x~ buffer ((C-R)/TR beats);
//   2. CLEAR: if new_seq, writes zeros over the h part of x~ (R/TR cycles),
//             so that h(0) = 0; c(0) = 0 is obtained through c_zero;
//   3. GATES: pulses gate_start to all four gate units with n_steps and
//             waits until each has reported done;
//   4. ELEM : issues the R/TR rows to the elementwise stage and waits until
//             all of them have left it (out_fire). Each leaving row is
//             written back into the h part of x~ and into the cell-state
//             buffer, ready for the next time step.
// Then done pulses for one cycle. Time steps do not overlap, because
// h(t) is part of x~(t+1). busy is high from start to done.
module lstm_controller
  import lstm_pkg::*;
#(
  parameter int unsigned R       = 512,
  parameter int unsigned C       = 1024,
  parameter int unsigned TR      = 32,
  parameter int unsigned STEPS_W = 16,
  localparam int unsigned XROWS  = (C - R) / TR,
  localparam int unsigned HROWS  = R / TR,
  localparam int unsigned BROWS  = C / TR,
  localparam int unsigned BW     = (BROWS > 1) ? $clog2(BROWS) : 1,
  localparam int unsigned RW     = (HROWS > 1) ? $clog2(HROWS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // host control
  input  logic               start,
  input  logic               new_seq,
  input  logic [STEPS_W-1:0] n_steps,
  output logic               busy,
  output logic               done,
  // x(t) load handshake
  input  logic               x_valid,
  output logic               x_ready,
  // x~ buffer write steering
  output logic               xb_wr_en,
  output logic [BW-1:0]      xb_wr_row,
  output xwsel_e             xb_wr_sel,
  // gate units
  output logic               gate_start,
  output logic [STEPS_W-1:0] gate_steps,
  input  logic [NGATES-1:0]  gate_done,
  // elementwise stage
  output logic               el_valid,
  input  logic               el_ready,
  output logic [RW-1:0]      el_row,
  output logic               c_zero,
  input  logic               out_fire,
  input  logic [RW-1:0]      out_row,
  // cell-state buffer write
  output logic               cb_wr_en
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_CLEAR, S_GATES, S_ELEM, S_DRAIN} state_e;
  state_e state;

  logic [BW-1:0]     row;
  logic [RW-1:0]     nout;
  logic [NGATES-1:0] seen;
  logic              seq_q;

  assign busy       = (state != S_IDLE);
  assign x_ready    = (state == S_LOAD);
  assign el_valid   = (state == S_ELEM);
  assign el_row     = RW'(row);
  assign c_zero     = seq_q;
  assign cb_wr_en   = out_fire;

  always_comb begin
    xb_wr_en  = 1'b0;
    xb_wr_row = row;
    xb_wr_sel = XW_INPUT;
    if (state == S_LOAD && x_valid) begin
      xb_wr_en = 1'b1;
    end else if (state == S_CLEAR) begin
      xb_wr_en  = 1'b1;
      xb_wr_row = BW'(XROWS) + row;
      xb_wr_sel = XW_ZERO;
    end else if (out_fire) begin
      xb_wr_en  = 1'b1;
      xb_wr_row = BW'(XROWS) + BW'(out_row);
      xb_wr_sel = XW_H;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      row        <= '0;
      nout       <= '0;
      seen       <= '0;
      seq_q      <= 1'b0;
      done       <= 1'b0;
      gate_start <= 1'b0;
      gate_steps <= '0;
    end else begin
      done       <= 1'b0;
      gate_start <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state      <= S_LOAD;
          row        <= '0;
          seq_q      <= new_seq;
          gate_steps <= n_steps;
        end
        S_LOAD: if (x_valid) begin
          if (row == BW'(XROWS - 1)) begin
            row <= '0;
            if (seq_q) state <= S_CLEAR;
            else begin state <= S_GATES; gate_start <= 1'b1; seen <= '0; end
          end else row <= row + 1'b1;
        end
        S_CLEAR: begin
          if (row == BW'(HROWS - 1)) begin
            row        <= '0;
            state      <= S_GATES;
            gate_start <= 1'b1;
            seen       <= '0;
          end else row <= row + 1'b1;
        end
        S_GATES: begin
          seen <= seen | gate_done;
          if ((seen | gate_done) == '1) begin
            state <= S_ELEM;
            row   <= '0;
            nout  <= '0;
          end
        end
        S_ELEM: if (el_ready) begin
          if (row == BW'(HROWS - 1)) state <= S_DRAIN;
          row <= row + 1'b1;
        end
        default: ;  // S_DRAIN
      endcase
      if (state == S_ELEM || state == S_DRAIN) begin
        if (out_fire) begin
          nout <= nout + 1'b1;
          if (nout == RW'(HROWS - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
      end
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 start |-> !busy);
endmodule
