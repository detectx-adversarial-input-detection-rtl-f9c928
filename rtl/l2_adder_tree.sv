// l2_adder_tree: the L2 adder tree that sums the accumulation registers of the
// SoI computing unit into one SoI value.
//
// A balanced binary tree of N-1 two-input adders (8+4+2+1 for N = 16), as the
// paper's block diagram draws it for four registers. Each level widens by one
// bit, so the sum never overflows. Purely combinational: the caller registers
// the result. N need not be a power of two; missing leaves are zero.
module l2_adder_tree #(
  parameter int unsigned N     = detectx_pkg::N_ADC,
  parameter int unsigned IN_W  = detectx_pkg::ACC_W,
  parameter int unsigned OUT_W = IN_W + $clog2(N)
) (
  input  logic [N-1:0][IN_W-1:0] in_vals,
  output logic [OUT_W-1:0]       sum
);

  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 0;
  localparam int unsigned LEAVES = 1 << LEVELS;

  // node[l][i]: level l holds LEAVES >> l partial sums
  logic [LEVELS:0][LEAVES-1:0][OUT_W-1:0] node;

  for (genvar i = 0; i < LEAVES; i++) begin : g_leaf
    if (i < N) begin : g_in
      assign node[0][i] = OUT_W'(in_vals[i]);
    end else begin : g_pad
      assign node[0][i] = '0;
    end
  end

  for (genvar l = 1; l <= LEVELS; l++) begin : g_level
    for (genvar i = 0; i < LEAVES; i++) begin : g_node
      if (i < (LEAVES >> l)) begin : g_add
        assign node[l][i] = node[l-1][2*i] + node[l-1][2*i+1];
      end else begin : g_unused
        assign node[l][i] = '0;
      end
    end
  end

  assign sum = node[LEVELS][0];

endmodule
