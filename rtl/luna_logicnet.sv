// luna_logicnet: LUT-based neural-network classifier (LogicNet).
//
// A chain of NUM_LAYERS luna_logicnet_layer stages. Layer l has WIDTH[l]
// neurons of fan-in FANIN[l], reading INBITS[l]-bit values from the layer
// before it (for layer 0: the IN_FEATS single bits of the integrator's
// feature vector, so INBITS[0] = 1 means every feature bit is one input).
// Layer l therefore emits INBITS[l+1]-bit values, and the last layer one
// OUTBITS-bit code, whose MSB is the predicted qubit state (1 = |1>).
//
// Defaults: 145, 40, 15 and 1 neurons; fan-in 7, 6, 6, 8; input widths 1, 2,
// 2, 2 bits; i.e. NEQs of 7:2, 12:2, 12:2 and 16:2 bits. The layer sizes,
// fan-ins and bit widths are those of the fidelity-optimised design point.
// Reading the last code's MSB as the state, and the hash-based connectivity
// and truth tables (luna_pkg), are this design's stand-ins for a trained model.
//
// Timing: one register per layer, so state_o/code_o/valid_o follow
// feat_i/valid_i by NUM_LAYERS cycles (4), one vector accepted per cycle.
module luna_logicnet #(
  parameter int unsigned         IN_FEATS   = 56,
  parameter int unsigned         NUM_LAYERS = luna_pkg::NUM_LAYERS,
  parameter luna_pkg::layer_arr_t WIDTH     = luna_pkg::LN_WIDTH,
  parameter luna_pkg::layer_arr_t FANIN     = luna_pkg::LN_FANIN,
  parameter luna_pkg::layer_arr_t INBITS    = luna_pkg::LN_INBITS,
  parameter int unsigned         OUTBITS    = luna_pkg::LN_OUTBITS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                valid_i,
  input  logic [IN_FEATS-1:0] feat_i,
  output logic                valid_o,
  output logic [OUTBITS-1:0]  code_o,
  output logic                state_o
);
  for (genvar l = 0; l < NUM_LAYERS; l++) begin : g_layer
    localparam int unsigned N_IN  = (l == 0) ? IN_FEATS / INBITS[0] : WIDTH[l-1];
    localparam int unsigned OBITS = luna_pkg::layer_out_bits(INBITS, NUM_LAYERS, OUTBITS, l);
    logic [N_IN*INBITS[l]-1:0] x;
    logic [WIDTH[l]*OBITS-1:0] y;
    logic                      vi, vo;

    if (l == 0) begin : g_first
      assign x  = feat_i;
      assign vi = valid_i;
    end else begin : g_next
      assign x  = g_layer[l-1].y;
      assign vi = g_layer[l-1].vo;
    end

    luna_logicnet_layer #(
      .LAYER(l), .N_IN(N_IN), .IN_BITS(INBITS[l]), .N_OUT(WIDTH[l]),
      .FANIN(FANIN[l]), .OUT_BITS(OBITS)
    ) u_layer (
      .clk, .rst_n, .valid_i(vi), .x_i(x), .valid_o(vo), .y_o(y)
    );
  end

  assign valid_o = g_layer[NUM_LAYERS-1].vo;
  assign code_o  = g_layer[NUM_LAYERS-1].y;
  assign state_o = code_o[OUTBITS-1];

  initial assert (WIDTH[NUM_LAYERS-1] == 1 && IN_FEATS % INBITS[0] == 0)
    else $error("last layer must have one neuron; IN_FEATS must be a multiple of INBITS[0]");
endmodule
