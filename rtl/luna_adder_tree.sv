// luna_adder_tree: fully pipelined signed adder tree.
//
// Sums N signed IN_W-bit inputs presented in parallel. Level k of the tree
// holds ceil(N/2^k) partial sums; each element adds an adjacent pair of the
// level below (an odd element left over is carried up unchanged), and every
// level is registered. The tree is therefore DEPTH = ceil(log2 N) cycles deep
// and accepts a new input vector every cycle.
//
// Following the integrator description, the adder tree has a pipeline
// register at each stage, which gives the ceil(log2 N) integrator latency
// used by the latency model. Carrying every level at the full output width
// OUT_W (synthesis trims unused upper bits) is this design's simplification.
//
// Timing: sum_o/valid_o follow din/valid_i after exactly DEPTH clock edges
// (combinational pass-through when N = 1). valid is reset to 0; the data
// registers are not reset, as they are qualified by valid.
module luna_adder_tree #(
  parameter int unsigned N     = 200,
  parameter int unsigned IN_W  = 7,
  parameter int unsigned OUT_W = IN_W + $clog2(N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid_i,
  input  logic signed [IN_W-1:0]  din [N],
  output logic                    valid_o,
  output logic signed [OUT_W-1:0] sum_o
);
  localparam int unsigned DEPTH = $clog2(N);

  // number of partial sums on level k
  function automatic int unsigned cnt(input int unsigned k);
    return (N + (1 << k) - 1) >> k;
  endfunction

  for (genvar k = 0; k <= DEPTH; k++) begin : lv
    logic signed [OUT_W-1:0] s [cnt(k)];
    if (k == 0) begin : g_in
      for (genvar i = 0; i < N; i++) begin : g_ext
        assign s[i] = OUT_W'(din[i]);            // sign extension
      end
    end else begin : g_add
      for (genvar i = 0; i < cnt(k); i++) begin : g_node
        if (2 * i + 1 < cnt(k - 1)) begin : g_pair
          always_ff @(posedge clk) s[i] <= lv[k-1].s[2*i] + lv[k-1].s[2*i+1];
        end else begin : g_carry
          always_ff @(posedge clk) s[i] <= lv[k-1].s[2*i];
        end
      end
    end
  end

  assign sum_o = lv[DEPTH].s[0];

  if (DEPTH == 0) begin : g_nopipe
    assign valid_o = valid_i;
  end else begin : g_pipe
    logic [DEPTH-1:0] vld_q;
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) vld_q <= '0;
      else        vld_q <= (vld_q << 1) | DEPTH'(valid_i);
    assign valid_o = vld_q[DEPTH-1];
  end
endmodule
