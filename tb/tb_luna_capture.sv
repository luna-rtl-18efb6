// tb_luna_capture: self-checking test of the readout-trace capture buffer
// at its default window (samples 100..499 of each readout).
//
// Each sample pair carries a known value derived from its index and the
// readout number, so a wrong index, a lost sample or a wrong order shows up
// directly. Three readouts are run: gap-free (valid_o must come exactly 500
// cycles after trig_i), with random gaps in adc_valid_i, and with an extra
// trig_i in the middle that must be ignored. After each valid_o all 400
// I and Q slots are compared.
module tb_luna_capture;
  localparam int unsigned START = 100, END = 500, AW = 14, N = END - START;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 trig, av, busy, vo;
  logic signed [AW-1:0] ai, aq;
  logic signed [AW-1:0] is [N];
  logic signed [AW-1:0] qs [N];

  luna_capture dut (.clk, .rst_n, .trig_i(trig), .adc_valid_i(av), .adc_i(ai), .adc_q(aq),
                    .busy_o(busy), .valid_o(vo), .i_samp(is), .q_samp(qs));

  int checks = 0, failures = 0, cyc = 0, nvalid = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && vo) nvalid++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  function automatic logic signed [AW-1:0] ival(int r, int k); return AW'(k * 37 + r * 1001 - 8000); endfunction
  function automatic logic signed [AW-1:0] qval(int r, int k); return AW'(-k * 29 + r * 77 + 5000); endfunction

  // run readout r; gaps: random adc_valid_i gaps; retrig: extra trigger
  task automatic readout(int r, bit gaps, bit retrig);
    int k, t0;
    k = 0;
    while (k < END) begin
      @(negedge clk);
      av   = !(gaps && k > 0 && $urandom_range(0, 3) == 0);
      trig = (k == 0) || (retrig && k == 250 && av);
      ai   = ival(r, k);
      aq   = qval(r, k);
      if (k == 0) t0 = cyc;
      if (av) k++;
    end
    @(negedge clk);
    av = 0; trig = 0;
    check(nvalid == r - 1 && vo, $sformatf("readout %0d: valid_o not seen after the last sample", r));
    if (!gaps) check(cyc - t0 == END, $sformatf("readout %0d: %0d cycles from trigger to valid", r, cyc - t0));
    check(!busy, "busy after the last sample");
    for (int s = 0; s < int'(N); s++) begin
      check(is[s] == ival(r, START + s), $sformatf("r%0d I[%0d]=%0d exp %0d", r, s, is[s], ival(r, START + s)));
      check(qs[s] == qval(r, START + s), $sformatf("r%0d Q[%0d]", r, s));
    end
  endtask

  initial begin
    trig = 0; av = 0; ai = '0; aq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    check(!busy && !vo, "idle after reset");
    readout(1, 0, 0);
    readout(2, 1, 0);
    readout(3, 0, 1);
    repeat (5) @(negedge clk);
    check(nvalid == 3, $sformatf("%0d valid pulses, expected 3", nvalid));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
