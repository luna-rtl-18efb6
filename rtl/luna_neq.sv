// luna_neq: one LogicNet Neuron Equivalent (NEQ).
//
// A NEQ takes FANIN inputs of INBITS bits each (X = FANIN*INBITS bits) and
// returns OUTBITS bits. The weights, bias, activation and quantisation of a
// trained neuron are folded into one X-input, OUTBITS-output Boolean function,
// i.e. a 2^X-entry truth table, which synthesis maps onto FPGA LUTs. The
// lookup is purely combinational; the enclosing layer registers its output.
//
// The truth table is given as a function of the table index:
// y = luna_pkg::neq_truth(LAYER, INDEX, ..., x). That function is the stand-in
// for trained contents (see luna_pkg); replacing it with a case table of a
// trained network leaves this module unchanged. Writing the table as a
// function, rather than as an initialised ROM array, keeps elaboration cheap
// for the 2^16-entry output neuron.
//
// Ports: x (X bits, slot j in x[j*INBITS +: INBITS]), y (OUTBITS bits).
module luna_neq #(
  parameter int unsigned LAYER   = 0,
  parameter int unsigned INDEX   = 0,
  parameter int unsigned FANIN   = 7,
  parameter int unsigned INBITS  = 1,
  parameter int unsigned OUTBITS = 2
) (
  input  logic [FANIN*INBITS-1:0] x,
  output logic [OUTBITS-1:0]      y
);
  localparam int unsigned SH = luna_pkg::neq_shift(FANIN, INBITS, OUTBITS);

  always_comb
    y = OUTBITS'(luna_pkg::neq_truth(LAYER, INDEX, FANIN, INBITS, OUTBITS, SH,
                                     32'(x)));
endmodule
