// adder_tree: combinational fp32 reduction of N values with a balanced
// binary tree of fp32_add cells, as drawn inside the dot-product unit.
// The inputs are padded with +0 up to a power of two P and placed in the
// leaves of a heap-ordered node array (node i adds nodes 2i+1 and 2i+2);
// adding +0 leaves a value unchanged, so padding costs no accuracy.
// Interface: sum = in[0] + ... + in[N-1]; with N = 1 the single input is
// passed on. Depth is log2(P) adders.
module adder_tree
  import lstm_pkg::*;
#(
  parameter int unsigned N = 4,
  localparam int unsigned P = (N > 1) ? (1 << $clog2(N)) : 1
) (
  input  fp32_t in [N],
  output fp32_t sum
);
  fp32_t node [2*P-1];

  for (genvar k = 0; k < P; k++) begin : g_leaf
    if (k < N) begin : g_in
      assign node[P-1+k] = in[k];
    end else begin : g_pad
      assign node[P-1+k] = FP_ZERO;
    end
  end

  for (genvar i = 0; i < P - 1; i++) begin : g_add
    fp32_add u_add (.a(node[2*i+1]), .b(node[2*i+2]), .y(node[i]));
  end

  assign sum = node[0];
endmodule
