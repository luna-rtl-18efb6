// luna_logicnet_layer: one pipelined layer of a LogicNet classifier.
//
// The layer has N_OUT neurons (NEQs). Neuron n reads FANIN of the N_IN sources
// of the previous layer, each IN_BITS wide, chosen by a fixed sparse
// connectivity (luna_pkg::neq_source), looks its OUT_BITS-bit output up in its
// truth table (luna_neq), and the outputs of all neurons are registered. The
// sparse, low fan-in wiring is pure routing; a neuron is one lookup, so each
// layer is one clock cycle of latency.
//
// Bus packing: source s of the input occupies x_i[s*IN_BITS +: IN_BITS];
// neuron n drives y_o[n*OUT_BITS +: OUT_BITS]. The connectivity and table
// contents are stand-ins for a trained network (see luna_pkg).
//
// Timing: y_o/valid_o follow x_i/valid_i by one clock edge; valid is reset to
// 0, the data register is not reset.
module luna_logicnet_layer #(
  parameter int unsigned LAYER    = 1,
  parameter int unsigned N_IN     = 145,
  parameter int unsigned IN_BITS  = 2,
  parameter int unsigned N_OUT    = 40,
  parameter int unsigned FANIN    = 6,
  parameter int unsigned OUT_BITS = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      valid_i,
  input  logic [N_IN*IN_BITS-1:0]   x_i,
  output logic                      valid_o,
  output logic [N_OUT*OUT_BITS-1:0] y_o
);
  logic [N_OUT*OUT_BITS-1:0] y_d;

  for (genvar n = 0; n < N_OUT; n++) begin : g_neq
    logic [FANIN*IN_BITS-1:0] nx;
    for (genvar j = 0; j < FANIN; j++) begin : g_fanin
      localparam int unsigned SRC = luna_pkg::neq_source(LAYER, n, j, N_IN, FANIN);
      assign nx[j*IN_BITS +: IN_BITS] = x_i[SRC*IN_BITS +: IN_BITS];
    end
    luna_neq #(
      .LAYER(LAYER), .INDEX(n), .FANIN(FANIN), .INBITS(IN_BITS), .OUTBITS(OUT_BITS)
    ) u_neq (
      .x(nx), .y(y_d[n*OUT_BITS +: OUT_BITS])
    );
  end

  always_ff @(posedge clk) y_o <= y_d;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;

  initial assert (FANIN <= N_IN) else $error("FANIN exceeds the number of sources");
endmodule
