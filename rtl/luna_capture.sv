// luna_capture: readout-trace capture buffer in front of the integrator.
//
// The demodulated ADC delivers one I/Q sample pair per cycle in which
// adc_valid_i is high. A readout starts with trig_i, which marks the sample
// on the bus in that cycle as index 0; gaps (adc_valid_i low) are allowed and
// not counted. Samples with index START..END-1 are shifted into two
// N_SAMPLES-deep registers (I and Q), oldest at element 0; samples before
// START are skipped. When sample END-1 has been taken, valid_o pulses for one
// cycle while i_samp/q_samp hold the complete trace in parallel, and the
// buffer is ready for the next trig_i. A trig_i while a trace is being
// captured is ignored (busy_o is high).
//
// The start index (parameter START, default 100) and the fixed end index
// (END, 500) follow the design space of the integrator. One sample per clock
// on the input, the trigger convention and the shift-register buffer are
// this design's choices.
//
// Timing: valid_o is high in the cycle after the edge that captures sample
// END-1, i.e. END cycles after trig_i for a gap-free stream.
module luna_capture #(
  parameter int unsigned START = luna_pkg::START_SAMPLE,
  parameter int unsigned END   = luna_pkg::END_SAMPLE,
  parameter int unsigned ADC_W = luna_pkg::ADC_W,
  localparam int unsigned N_SAMPLES = END - START,
  localparam int unsigned IDX_W     = $clog2(END + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    trig_i,
  input  logic                    adc_valid_i,
  input  logic signed [ADC_W-1:0] adc_i,
  input  logic signed [ADC_W-1:0] adc_q,
  output logic                    busy_o,
  output logic                    valid_o,
  output logic signed [ADC_W-1:0] i_samp [N_SAMPLES],
  output logic signed [ADC_W-1:0] q_samp [N_SAMPLES]
);
  logic             busy_q;
  logic [IDX_W-1:0] idx_q;
  logic             start, take, in_win, last;
  logic [IDX_W-1:0] cur;

  always_comb begin
    start  = trig_i && adc_valid_i && !busy_q;
    take   = adc_valid_i && (start || busy_q);
    cur    = start ? '0 : idx_q;
    in_win = take && (cur >= IDX_W'(START)) && (cur < IDX_W'(END));
    last   = take && (cur == IDX_W'(END - 1));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy_q  <= 1'b0;
      idx_q   <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= last;
      if (take) begin
        idx_q  <= cur + 1'b1;
        busy_q <= !last;
      end
    end

  always_ff @(posedge clk)
    if (in_win) begin
      for (int unsigned s = 0; s + 1 < N_SAMPLES; s++) begin
        i_samp[s] <= i_samp[s+1];
        q_samp[s] <= q_samp[s+1];
      end
      i_samp[N_SAMPLES-1] <= adc_i;
      q_samp[N_SAMPLES-1] <= adc_q;
    end

  assign busy_o = busy_q;

  // valid_o is a one-cycle pulse and the buffer is free while it is high
  a_valid_pulse: assert property (@(posedge clk) disable iff (!rst_n) valid_o |=> !valid_o);
  a_valid_idle:  assert property (@(posedge clk) disable iff (!rst_n) valid_o |-> !busy_q);
endmodule
