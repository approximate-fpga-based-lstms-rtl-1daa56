// dot_product_unit: sparse dot product of one refinement step, scaled by sigma.
//
// For refinement step n of one gate it computes
//     s(n) = sigma(n) * sum_j v(n)[j] * x~[idx(n)[j]]
// over the NZ non-zero elements of the pruned right singular vector, which
// arrive TC per cycle (one tile per cycle, as in the source design, which
// unrolls the dot product by Tc and follows it with the sigma multiplier).
// Each non-zero value comes with its column index into x~; sending the index
// with the value is this design's choice of mask encoding.
//
// Pipeline: cycle 0 a tile is accepted and its indices go to the x~ buffer;
// cycle 1 the TC products are summed by the adder tree and added to the
// running sum (the first tile of a step overwrites it). When the last tile
// of a step has been summed, the sum is multiplied by sigma (taken from
// v_sigma on that last tile) and parked in a one-entry hand-off register
// (s_valid/s_data, with first/last-step flags) until the multiplier array
// pops it with s_ready. The unit meanwhile starts on the next step, so the
// dot product of step n+1 overlaps the u multiplication of step n; the last
// tile of a step is held back (v_ready low) while the hand-off is full.
// A step takes NZ/TC cycles plus one cycle of pipeline; start loads n_steps
// (must be >= 1), and the unit stops asking for tiles after n_steps steps.
module dot_product_unit
  import lstm_pkg::*;
#(
  parameter int unsigned C       = 1024,
  parameter int unsigned NZ      = 512,
  parameter int unsigned TC      = 1,
  parameter int unsigned STEPS_W = 16,
  localparam int unsigned IW     = $clog2(C),
  localparam int unsigned TILES  = NZ / TC,
  localparam int unsigned TW     = (TILES > 1) ? $clog2(TILES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [STEPS_W-1:0] n_steps,
  // v stream from off-chip memory
  input  logic               v_valid,
  output logic               v_ready,
  input  fp32_t              v_val   [TC],
  input  logic [IW-1:0]      v_idx   [TC],
  input  fp32_t              v_sigma,
  // x~ buffer read port (data one cycle after index)
  output logic [IW-1:0]      x_idx   [TC],
  input  fp32_t              x_data  [TC],
  // scaled result to the multiplier array
  output logic               s_valid,
  input  logic               s_ready,
  output fp32_t              s_data,
  output logic               s_first,
  output logic               s_last
);
  logic               running;
  logic [TW-1:0]      tile;
  logic [STEPS_W-1:0] step, steps_q;
  logic               tile_last, fire;

  // stage-1 registers (aligned with the x~ read data)
  logic  p_valid, p_first, p_last, p_sfirst, p_slast;
  fp32_t p_val [TC];
  fp32_t p_sigma;

  fp32_t prod [TC];
  fp32_t tree_sum, acc, acc_next, scaled;

  assign tile_last = (tile == TW'(TILES - 1));
  assign v_ready   = running && (!tile_last || (!s_valid && !(p_valid && p_last)));
  assign fire      = v_valid && v_ready;
  assign x_idx     = v_idx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0;
      tile    <= '0;
      step    <= '0;
      steps_q <= '0;
      p_valid <= 1'b0;
    end else begin
      if (start) begin
        running <= 1'b1;
        tile    <= '0;
        step    <= '0;
        steps_q <= n_steps;
      end else if (fire) begin
        if (tile_last) begin
          tile <= '0;
          step <= step + 1'b1;
          if (step + 1'b1 == steps_q) running <= 1'b0;
        end else begin
          tile <= tile + 1'b1;
        end
      end
      p_valid <= fire;
    end
  end

  always_ff @(posedge clk) begin
    if (fire) begin
      p_val    <= v_val;
      p_sigma  <= v_sigma;
      p_first  <= (tile == '0);
      p_last   <= tile_last;
      p_sfirst <= (step == '0);
      p_slast  <= (step + 1'b1 == steps_q);
    end
  end

  for (genvar k = 0; k < TC; k++) begin : g_mul
    fp32_mul u_mul (.a(p_val[k]), .b(x_data[k]), .y(prod[k]));
  end
  adder_tree #(.N(TC)) u_tree (.in(prod), .sum(tree_sum));

  fp32_add u_acc   (.a(acc), .b(tree_sum), .y(acc_next));
  fp32_mul u_sigma (.a(p_first ? tree_sum : acc_next), .b(p_sigma), .y(scaled));

  always_ff @(posedge clk) begin
    if (p_valid) acc <= p_first ? tree_sum : acc_next;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_valid <= 1'b0;
    end else if (p_valid && p_last) begin
      s_valid <= 1'b1;
    end else if (s_ready) begin
      s_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (p_valid && p_last) begin
      s_data  <= scaled;
      s_first <= p_sfirst;
      s_last  <= p_slast;
    end
  end

  // The hand-off register must be empty whenever a step's result lands.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
                                   (p_valid && p_last) |-> !s_valid);
  a_steps_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
                               (start) |-> (n_steps != '0));
endmodule
