// tb_luna_integrator: self-checking test of the integrator preprocessor at
// its default size (400 I and 400 Q samples, 2 windows, shifts 7 and 1).
//
// Random 14-bit traces (plus an all-minimum and an all-maximum trace) are
// applied on random cycles, back to back included. For every trace the four
// expected 14-bit features are computed with floor arithmetic by the
// reference model, queued with the entry cycle, and compared with feat_o
// when valid_o rises, which must be exactly ceil(log2 200) = 8 cycles later.
// A second instance, configured like the area-optimised design point (one
// window of 400 samples, shifts 9 and 0: 5-bit samples, 14-bit features),
// receives the same traces and must answer after ceil(log2 400) = 9 cycles.
module tb_luna_integrator;
  import luna_ref_pkg::*;
  localparam int unsigned N = 400, NW = 2, SM = 7, SN = 1, AW = 14;
  localparam int unsigned WIN = N / NW, FW = AW - SM + $clog2(WIN) - SN;
  localparam int unsigned LAT = $clog2(WIN);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  vi, vo;
  logic signed [AW-1:0]  is [N];
  logic signed [AW-1:0]  qs [N];
  logic [2*NW*FW-1:0]    feat;

  luna_integrator dut (.clk, .rst_n, .valid_i(vi), .i_samp(is), .q_samp(qs), .valid_o(vo), .feat_o(feat));

  // area-optimised integrator settings
  localparam int unsigned NW_A = 1, SM_A = 9, SN_A = 0;
  localparam int unsigned WIN_A = N / NW_A, FW_A = AW - SM_A + $clog2(WIN_A) - SN_A;
  localparam int unsigned LAT_A = $clog2(WIN_A);
  logic               vo_a;
  logic [2*NW_A*FW_A-1:0] feat_a;
  luna_integrator #(.N_SAMPLES(N), .NUM_WIN(NW_A), .SHIFT_M(SM_A), .SHIFT_N(SN_A)) dut_a (
    .clk, .rst_n, .valid_i(vi), .i_samp(is), .q_samp(qs), .valid_o(vo_a), .feat_o(feat_a));
  int qfa[$][$];
  int qta[$];

  always @(posedge clk) if (rst_n && vo_a) begin
    check(qta.size() > 0, "area config: unexpected valid");
    if (qta.size() > 0) begin
      check(cyc - qta[0] == LAT_A, $sformatf("area config: latency %0d", cyc - qta[0]));
      for (int f = 0; f < 2 * NW_A; f++)
        check(int'($signed(feat_a[f*FW_A +: FW_A])) == qfa[0][f],
              $sformatf("area config: feature %0d = %0d exp %0d", f, int'($signed(feat_a[f*FW_A +: FW_A])), qfa[0][f]));
      void'(qfa.pop_front()); void'(qta.pop_front());
    end
  end

  int checks = 0, failures = 0, cyc = 0;
  int qf[$][$];   // expected feature lists
  int qt[$];
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  always @(posedge clk) if (rst_n && vo) begin
    check(qt.size() > 0, "unexpected valid");
    if (qt.size() > 0) begin
      check(cyc - qt[0] == LAT, $sformatf("latency %0d", cyc - qt[0]));
      for (int f = 0; f < 2 * NW; f++)
        check(int'($signed(feat[f*FW +: FW])) == qf[0][f],
              $sformatf("feature %0d = %0d exp %0d", f, int'($signed(feat[f*FW +: FW])), qf[0][f]));
      void'(qf.pop_front()); void'(qt.pop_front());
    end
  end

  initial begin
    int win[$], exp_f[$];
    vi = 0;
    foreach (is[i]) begin is[i] = '0; qs[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      @(negedge clk);
      vi = (t < 4) || ($urandom_range(0, 2) != 0);
      foreach (is[i]) begin
        case (t)
          0: begin is[i] = AW'(-(1 << (AW - 1))); qs[i] = AW'((1 << (AW - 1)) - 1); end
          1: begin is[i] = AW'((1 << (AW - 1)) - 1); qs[i] = AW'(-(1 << (AW - 1))); end
          default: begin is[i] = AW'($urandom); qs[i] = AW'($urandom); end
        endcase
      end
      if (vi) begin
        exp_f = {};
        for (int c = 0; c < 2; c++)
          for (int w = 0; w < NW; w++) begin
            win = {};
            for (int s = 0; s < WIN; s++) win.push_back(c == 0 ? int'(is[w*WIN+s]) : int'(qs[w*WIN+s]));
            exp_f.push_back(ref_feature(win, SM, SN));
          end
        qf.push_back(exp_f); qt.push_back(cyc);
        exp_f = {};
        for (int c = 0; c < 2; c++) begin
          win = {};
          for (int s = 0; s < int'(N); s++) win.push_back(c == 0 ? int'(is[s]) : int'(qs[s]));
          exp_f.push_back(ref_feature(win, SM_A, SN_A));
        end
        qfa.push_back(exp_f); qta.push_back(cyc);
      end
    end
    @(negedge clk); vi = 0;
    repeat (LAT_A + 3) @(negedge clk);
    check(qt.size() == 0 && qta.size() == 0, "results missing at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
