// luna_integrator: integrator-based preprocessor of the LUNA readout path.
//
// Reduces one captured readout trace (N_SAMPLES I samples and N_SAMPLES Q
// samples, ADC_W bits each, all presented in parallel) to 2*NUM_WIN scalar
// features. The trace is cut into NUM_WIN equal, non-overlapping windows.
// Every sample is first arithmetically right-shifted by SHIFT_M to drop LSB
// noise (14-bit -> 7-bit at the defaults), each window is summed by its own
// pipelined adder tree (200 samples -> 15-bit sum), and the sum is shifted
// right by SHIFT_N to form the window's feature (14 bits). The features are
// concatenated into a FEAT_BITS-wide vector (56 bits at the defaults):
//   feat_o[(c*NUM_WIN + w)*FEAT_W +: FEAT_W], c = 0 for I, 1 for Q, w = window.
//
// The structure (pre-shift, adder tree per window, post-shift, concatenation)
// and the default numbers follow the fidelity-optimised design point. The
// samples and sums are taken as two's complement and the shifts as arithmetic
// (rounding towards minus infinity); the feature order above and the
// combinational placement of both shifts are this design's choices.
//
// Timing: feat_o/valid_o follow i_samp/q_samp/valid_i after
// ceil(log2(N_SAMPLES/NUM_WIN)) cycles (8 at the defaults); one trace per
// cycle can be accepted.
module luna_integrator #(
  parameter int unsigned N_SAMPLES = luna_pkg::END_SAMPLE - luna_pkg::START_SAMPLE,
  parameter int unsigned NUM_WIN   = luna_pkg::NUM_WIN,
  parameter int unsigned SHIFT_M   = luna_pkg::SHIFT_M,
  parameter int unsigned SHIFT_N   = luna_pkg::SHIFT_N,
  parameter int unsigned ADC_W     = luna_pkg::ADC_W,
  localparam int unsigned WIN       = N_SAMPLES / NUM_WIN,
  localparam int unsigned SW        = ADC_W - SHIFT_M,
  localparam int unsigned SUM_W     = SW + $clog2(WIN),
  localparam int unsigned FEAT_W    = SUM_W - SHIFT_N,
  localparam int unsigned FEAT_BITS = 2 * NUM_WIN * FEAT_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid_i,
  input  logic signed [ADC_W-1:0] i_samp [N_SAMPLES],
  input  logic signed [ADC_W-1:0] q_samp [N_SAMPLES],
  output logic                    valid_o,
  output logic [FEAT_BITS-1:0]    feat_o
);
  logic [2*NUM_WIN-1:0] vld;

  for (genvar c = 0; c < 2; c++) begin : g_ch
    for (genvar w = 0; w < NUM_WIN; w++) begin : g_win
      logic signed [SW-1:0]    pre [WIN];
      logic signed [SUM_W-1:0] sum;

      // pre-accumulation shift
      for (genvar s = 0; s < WIN; s++) begin : g_pre
        if (c == 0) begin : g_i
          assign pre[s] = SW'(i_samp[w*WIN+s] >>> SHIFT_M);
        end else begin : g_q
          assign pre[s] = SW'(q_samp[w*WIN+s] >>> SHIFT_M);
        end
      end

      luna_adder_tree #(.N(WIN), .IN_W(SW), .OUT_W(SUM_W)) u_tree (
        .clk, .rst_n, .valid_i,
        .din(pre), .valid_o(vld[c*NUM_WIN+w]), .sum_o(sum)
      );

      // post-accumulation shift
      assign feat_o[(c*NUM_WIN+w)*FEAT_W +: FEAT_W] = FEAT_W'(sum >>> SHIFT_N);
    end
  end

  // all trees share one schedule
  assign valid_o = &vld;

  // samples beyond NUM_WIN*WIN (when N_SAMPLES is not a multiple) are unused
  initial assert (N_SAMPLES % NUM_WIN == 0)
    else $error("N_SAMPLES must be a multiple of NUM_WIN");
endmodule
