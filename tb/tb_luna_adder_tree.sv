// tb_luna_adder_tree: self-checking test of the pipelined adder tree.
//
// Two trees are driven with random signed vectors on random cycles: the
// default 200-input tree (depth 8) and an odd 13-input tree (depth 4, which
// exercises the carried-up odd elements). Every input vector's expected sum
// is queued with the cycle it entered; each valid_o must match the head of
// the queue and arrive exactly ceil(log2 N) cycles later. Extreme inputs
// (all most-negative, all most-positive) are included.
module tb_luna_adder_tree;
  localparam int unsigned NA = 200, NB = 13, W = 7;
  localparam int unsigned DA = $clog2(NA), DB = $clog2(NB);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                          va, vb, voa, vob;
  logic signed [W-1:0]           da [NA];
  logic signed [W-1:0]           db [NB];
  logic signed [W+$clog2(NA)-1:0] sa;
  logic signed [W+$clog2(NB)-1:0] sb;

  luna_adder_tree #(.N(NA), .IN_W(W)) dut_a (.clk, .rst_n, .valid_i(va), .din(da), .valid_o(voa), .sum_o(sa));
  luna_adder_tree #(.N(NB), .IN_W(W)) dut_b (.clk, .rst_n, .valid_i(vb), .din(db), .valid_o(vob), .sum_o(sb));

  int checks = 0, failures = 0, cyc = 0;
  int qa_sum[$], qa_t[$], qb_sum[$], qb_t[$];

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // compare outputs on every edge
  always @(posedge clk) if (rst_n) begin
    if (voa) begin
      check(qa_sum.size() > 0, "A: unexpected valid");
      if (qa_sum.size() > 0) begin
        check(int'(sa) == qa_sum[0], $sformatf("A: sum %0d exp %0d", sa, qa_sum[0]));
        check(cyc - qa_t[0] == DA, $sformatf("A: latency %0d", cyc - qa_t[0]));
        void'(qa_sum.pop_front()); void'(qa_t.pop_front());
      end
    end
    if (vob) begin
      check(qb_sum.size() > 0, "B: unexpected valid");
      if (qb_sum.size() > 0) begin
        check(int'(sb) == qb_sum[0], $sformatf("B: sum %0d exp %0d", sb, qb_sum[0]));
        check(cyc - qb_t[0] == DB, $sformatf("B: latency %0d", cyc - qb_t[0]));
        void'(qb_sum.pop_front()); void'(qb_t.pop_front());
      end
    end
  end

  function automatic int rnd_sample(int mode);
    case (mode)
      0: return -(1 << (W - 1));
      1: return (1 << (W - 1)) - 1;
      default: return int'($urandom_range(0, (1 << W) - 1)) - (1 << (W - 1));
    endcase
  endfunction

  initial begin
    int s, mode;
    va = 0; vb = 0;
    foreach (da[i]) da[i] = '0;
    foreach (db[i]) db[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      mode = (t < 2) ? t : 2;
      va = (t < 2) || ($urandom_range(0, 3) != 0);
      vb = 1'($urandom_range(0, 1));
      s = 0;
      foreach (da[i]) begin da[i] = W'(rnd_sample(mode)); s += int'(da[i]); end
      if (va) begin qa_sum.push_back(s); qa_t.push_back(cyc); end
      s = 0;
      foreach (db[i]) begin db[i] = W'(rnd_sample(mode)); s += int'(db[i]); end
      if (vb) begin qb_sum.push_back(s); qb_t.push_back(cyc); end
    end
    @(negedge clk); va = 0; vb = 0;
    repeat (DA + 3) @(negedge clk);
    check(qa_sum.size() == 0 && qb_sum.size() == 0, "results missing at the end");
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
