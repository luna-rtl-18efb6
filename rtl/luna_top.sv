// luna_top: LUNA single-qubit readout accelerator.
//
// Datapath: demodulated I/Q samples from the ADC -> luna_capture (keeps
// samples START..END-1 of a readout, presents them in parallel) ->
// luna_integrator (pre-shift, per-window adder trees, post-shift: 56-bit
// feature vector) -> luna_logicnet (145-40-15-1 LUT neurons) ->
// luna_result_store (prediction saved to memory). No multiplier is used
// anywhere in the path.
//
// Interface: one I/Q sample pair per cycle with adc_valid_i; trig_i marks
// sample 0 of a readout. pred_valid_o/pred_state_o/pred_code_o give the
// classifier's decision as soon as it exists; saved_o pulses when it has been
// written to the result memory (rd_addr_i/rd_data_o, wr_ptr_o).
//
// Timing (defaults): after the last sample of the window has been captured
// (capture valid), the prediction appears 12 cycles later (8 adder-tree
// levels + 4 LogicNet layers) and is saved 2 cycles after that: 14 cycles,
// as in the reported end-to-end latency. A new readout can start every
// END_SAMPLE cycles; the pipeline itself would accept one trace per cycle.
//
// Configuration, stages and latencies follow the fidelity-optimised design
// point; the sample interface, trigger and result memory organisation are
// this design's choices (see the submodules).
module luna_top #(
  parameter int unsigned          START_SAMPLE = luna_pkg::START_SAMPLE,
  parameter int unsigned          END_SAMPLE   = luna_pkg::END_SAMPLE,
  parameter int unsigned          NUM_WIN      = luna_pkg::NUM_WIN,
  parameter int unsigned          SHIFT_M      = luna_pkg::SHIFT_M,
  parameter int unsigned          SHIFT_N      = luna_pkg::SHIFT_N,
  parameter int unsigned          NUM_LAYERS   = luna_pkg::NUM_LAYERS,
  parameter luna_pkg::layer_arr_t LN_WIDTH     = luna_pkg::LN_WIDTH,
  parameter luna_pkg::layer_arr_t LN_FANIN     = luna_pkg::LN_FANIN,
  parameter luna_pkg::layer_arr_t LN_INBITS    = luna_pkg::LN_INBITS,
  parameter int unsigned          LN_OUTBITS   = luna_pkg::LN_OUTBITS,
  parameter int unsigned          RESULT_DEPTH = 256,
  localparam int unsigned ADC_W     = luna_pkg::ADC_W,
  localparam int unsigned N_SAMPLES = END_SAMPLE - START_SAMPLE,
  localparam int unsigned WIN       = N_SAMPLES / NUM_WIN,
  localparam int unsigned FEAT_W    = ADC_W - SHIFT_M + $clog2(WIN) - SHIFT_N,
  localparam int unsigned FEAT_BITS = 2 * NUM_WIN * FEAT_W,
  localparam int unsigned RAW       = (RESULT_DEPTH > 1) ? $clog2(RESULT_DEPTH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // demodulated ADC stream
  input  logic                    trig_i,
  input  logic                    adc_valid_i,
  input  logic signed [ADC_W-1:0] adc_i,
  input  logic signed [ADC_W-1:0] adc_q,
  output logic                    busy_o,
  // classifier decision
  output logic                    pred_valid_o,
  output logic                    pred_state_o,
  output logic [LN_OUTBITS-1:0]   pred_code_o,
  // result memory
  output logic                    saved_o,
  output logic                    saved_state_o,
  output logic [RAW-1:0]          wr_ptr_o,
  input  logic [RAW-1:0]          rd_addr_i,
  output logic [LN_OUTBITS:0]     rd_data_o
);
  logic                    trace_valid, feat_valid;
  logic signed [ADC_W-1:0] i_samp [N_SAMPLES];
  logic signed [ADC_W-1:0] q_samp [N_SAMPLES];
  logic [FEAT_BITS-1:0]    feat;

  luna_capture #(.START(START_SAMPLE), .END(END_SAMPLE), .ADC_W(ADC_W)) u_capture (
    .clk, .rst_n, .trig_i, .adc_valid_i, .adc_i, .adc_q,
    .busy_o, .valid_o(trace_valid), .i_samp, .q_samp
  );

  luna_integrator #(
    .N_SAMPLES(N_SAMPLES), .NUM_WIN(NUM_WIN), .SHIFT_M(SHIFT_M),
    .SHIFT_N(SHIFT_N), .ADC_W(ADC_W)
  ) u_integrator (
    .clk, .rst_n, .valid_i(trace_valid), .i_samp, .q_samp,
    .valid_o(feat_valid), .feat_o(feat)
  );

  luna_logicnet #(
    .IN_FEATS(FEAT_BITS), .NUM_LAYERS(NUM_LAYERS), .WIDTH(LN_WIDTH),
    .FANIN(LN_FANIN), .INBITS(LN_INBITS), .OUTBITS(LN_OUTBITS)
  ) u_logicnet (
    .clk, .rst_n, .valid_i(feat_valid), .feat_i(feat),
    .valid_o(pred_valid_o), .code_o(pred_code_o), .state_o(pred_state_o)
  );

  luna_result_store #(.DEPTH(RESULT_DEPTH), .CODE_W(LN_OUTBITS)) u_store (
    .clk, .rst_n, .valid_i(pred_valid_o), .state_i(pred_state_o),
    .code_i(pred_code_o), .saved_o, .last_state_o(saved_state_o),
    .wr_ptr_o, .rd_addr_i, .rd_data_o
  );
endmodule
