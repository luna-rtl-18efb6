// tb_luna_top_latency_cfg: end-to-end test of the accelerator configured
// as the latency-optimised design point: samples 100..499, 2 windows,
// pre-shift 9, post-shift 1 (12-bit features, 48 feature bits), and a
// LogicNet of 145, 35, 15 and 1 neurons with fan-in 6, 6, 6, 7 and input
// widths 1, 1, 1, 2 bits (one-bit hidden activations). The result memory is
// cut to 16 words so that it wraps within the 60 readouts run.
//
// The checks are those of tb_luna_top: every prediction against the
// reference model, 12 cycles from the complete trace to the prediction and
// 2 more to the saved result, and each mechanism (ADC gaps, ignored trigger,
// back-to-back readouts, pointer wrap, both states) at least once.
module tb_luna_top_latency_cfg;
  import luna_ref_pkg::*;
  localparam int unsigned START = 100, END = 500, NW = 2, SM = 9, SN = 1;
  localparam int unsigned WIN = (END - START) / NW, FW = 14 - SM + $clog2(WIN) - SN;
  localparam int unsigned NF = 2 * NW * FW, NL = 4, DEPTH = 16;
  localparam int NREAD = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              trig, av, busy, pv, ps, saved, sst;
  logic signed [13:0] ai, aq;
  logic [1:0]        pc;
  logic [3:0]        wp, ra;
  logic [2:0]        rd;

  luna_top #(
    .SHIFT_M(SM), .SHIFT_N(SN),
    .LN_WIDTH('{145, 35, 15, 1, 0, 0, 0, 0}), .LN_FANIN('{6, 6, 6, 7, 0, 0, 0, 0}),
    .LN_INBITS('{1, 1, 1, 2, 0, 0, 0, 0}), .RESULT_DEPTH(DEPTH)
  ) dut (
    .clk, .rst_n, .trig_i(trig), .adc_valid_i(av), .adc_i(ai), .adc_q(aq), .busy_o(busy),
    .pred_valid_o(pv), .pred_state_o(ps), .pred_code_o(pc),
    .saved_o(saved), .saved_state_o(sst), .wr_ptr_o(wp), .rd_addr_i(ra), .rd_data_o(rd));

  assign ra = wp - 4'd1;   // always look at the newest word

  int unsigned width[] = '{145, 35, 15, 1};
  int unsigned fanin[] = '{6, 6, 6, 7};
  int unsigned inbits[] = '{1, 1, 1, 2};

  int checks = 0, failures = 0, cyc = 0;
  int n_gap = 0, n_retrig = 0, n_b2b = 0, n_wrap = 0, n_s0 = 0, n_s1 = 0, n_pred = 0, n_saved = 0;
  int unsigned qp[$], qs[$];   // expected codes for prediction / save
  int qpt[$], qst[$];          // expected cycles
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (pv) begin
      check(qp.size() > 0, "unexpected prediction");
      if (qp.size() > 0) begin
        check(cyc == qpt[0], $sformatf("prediction at %0d, expected %0d", cyc, qpt[0]));
        check(int'(pc) == int'(qp[0]), $sformatf("code %0d exp %0d", pc, qp[0]));
        check(ps == 1'(qp[0] >> 1), "state");
        if (ps) n_s1++; else n_s0++;
        n_pred++;
        void'(qp.pop_front()); void'(qpt.pop_front());
      end
    end
    if (saved) begin
      check(qs.size() > 0, "unexpected save");
      if (qs.size() > 0) begin
        check(cyc == qst[0], $sformatf("save at %0d, expected %0d", cyc, qst[0]));
        check(int'(rd) == int'({1'(qs[0] >> 1), 2'(qs[0])}), $sformatf("memory word %0d", rd));
        check(sst == 1'(qs[0] >> 1), "saved state");
        check(32'(wp) == (n_saved + 1) % DEPTH, $sformatf("write pointer %0d", wp));
        if (wp == 0) n_wrap++;
        n_saved++;
        void'(qs.pop_front()); void'(qst.pop_front());
      end
    end
  end

  function automatic logic signed [13:0] clip14(int v);
    if (v > 8191) v = 8191;
    if (v < -8192) v = -8192;
    return 14'(v);
  endfunction

  // one readout; mode bit 0: gaps, bit 1: extra trigger, bit 2: idle before
  task automatic readout(int r, int mode);
    int k, ci, cq, code;
    bit state, fb[];
    int wi[NW][$], wq[NW][$];
    int feats[$];
    fb = new[NF];
    state = 1'($urandom);
    ci = state ? 1200 : -900;
    cq = state ? -700 : 1100;
    if (mode[2]) repeat ($urandom_range(1, 6)) begin @(negedge clk); av = 0; trig = 0; end
    else n_b2b += (r > 0);
    k = 0;
    while (k < int'(END)) begin
      @(negedge clk);
      av   = !(mode[0] && k > 0 && $urandom_range(0, 4) == 0);
      trig = (k == 0) || (mode[1] && k == 300);
      if (k == 300 && mode[1]) begin check(busy, "busy during capture"); n_retrig++; end
      ai = clip14((k >= 30 ? ci : 0) + int'($urandom_range(0, 8000)) - 4000);
      aq = clip14((k >= 30 ? cq : 0) + int'($urandom_range(0, 8000)) - 4000);
      if (av && k >= int'(START)) begin
        wi[(k - START) / WIN].push_back(int'(ai));
        wq[(k - START) / WIN].push_back(int'(aq));
      end
      if (av) k++;
    end
    n_gap += mode[0];
    // reference: features (I windows then Q windows) -> bits -> network
    feats = {};
    for (int w = 0; w < NW; w++) feats.push_back(ref_feature(wi[w], SM, SN));
    for (int w = 0; w < NW; w++) feats.push_back(ref_feature(wq[w], SM, SN));
    foreach (feats[f]) for (int b = 0; b < int'(FW); b++) fb[f*FW + b] = feats[f][b];
    code = ref_net(NL, width, fanin, inbits, 2, fb);
    qp.push_back(code); qpt.push_back(cyc + 13);
    qs.push_back(code); qst.push_back(cyc + 15);
  endtask

  initial begin
    trig = 0; av = 0; ai = '0; aq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < NREAD; r++) begin
      readout(r, (r % 4 == 1 ? 1 : 0) | (r % 5 == 2 ? 2 : 0) | (r % 3 == 0 ? 4 : 0));
    end
    @(negedge clk); trig = 0; av = 0;
    repeat (20) @(negedge clk);
    check(qp.size() == 0 && qs.size() == 0, "results missing at the end");
    check(n_pred == NREAD && n_saved == NREAD, "prediction or save count");
    $display("mechanisms: gaps=%0d ignored_triggers=%0d back_to_back=%0d wraps=%0d state0=%0d state1=%0d",
             n_gap, n_retrig, n_b2b, n_wrap, n_s0, n_s1);
    check(n_gap > 0, "no readout with ADC gaps");
    check(n_retrig > 0, "no trigger during a capture");
    check(n_b2b > 0, "no back-to-back readouts");
    check(n_wrap > 0, "result pointer never wrapped");
    check(n_s0 > 0 && n_s1 > 0, "only one state predicted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NREAD * 700 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
