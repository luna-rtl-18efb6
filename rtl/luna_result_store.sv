// luna_result_store: writes every qubit-state prediction into a result memory.
//
// The classifier's output is saved in two clock cycles: the first edge
// registers the prediction (state and output code), the second writes it
// into the next word of a DEPTH-word memory, addressed by a wrapping write
// pointer, and raises saved_o for one cycle together with last_state_o. The
// host reads the memory through an asynchronous read port (rd_addr_i ->
// rd_data_o) and learns how many results were written from wr_ptr_o.
//
// That saving a prediction to memory takes a fixed two cycles follows the
// end-to-end implementation; the memory depth, word layout ({state, code}),
// wrapping pointer and read port are this design's choices.
module luna_result_store #(
  parameter int unsigned DEPTH   = 256,
  parameter int unsigned CODE_W  = luna_pkg::LN_OUTBITS,
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid_i,
  input  logic              state_i,
  input  logic [CODE_W-1:0] code_i,
  output logic              saved_o,
  output logic              last_state_o,
  output logic [AW-1:0]     wr_ptr_o,
  input  logic [AW-1:0]     rd_addr_i,
  output logic [CODE_W:0]   rd_data_o
);
  logic [CODE_W:0] mem [DEPTH];
  logic            v1_q;
  logic [CODE_W:0] d1_q;
  logic [AW-1:0]   wp_q;

  // cycle 1: capture the prediction
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v1_q <= 1'b0;
    else        v1_q <= valid_i;
  always_ff @(posedge clk) d1_q <= {state_i, code_i};

  // cycle 2: write it to memory
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wp_q         <= '0;
      saved_o      <= 1'b0;
      last_state_o <= 1'b0;
    end else begin
      saved_o <= v1_q;
      if (v1_q) begin
        wp_q         <= (32'(wp_q) == DEPTH - 1) ? '0 : wp_q + 1'b1;
        last_state_o <= d1_q[CODE_W];
      end
    end

  always_ff @(posedge clk)
    if (v1_q) mem[wp_q] <= d1_q;

  assign wr_ptr_o  = wp_q;
  assign rd_data_o = mem[rd_addr_i];

  // every prediction is saved exactly two cycles after it is presented
  a_two_cycles: assert property (@(posedge clk) disable iff (!rst_n) valid_i |-> ##2 saved_o);
  a_no_extra:   assert property (@(posedge clk) disable iff (!rst_n) saved_o |-> $past(valid_i, 2));
endmodule
