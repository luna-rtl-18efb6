// tb_luna_logicnet: self-checking test of the whole LogicNet classifier at
// its default size (56 input bits; 145, 40, 15, 1 neurons).
//
// Random 56-bit feature vectors are applied on random cycles, back to back
// included. The reference model evaluates the network layer by layer; code_o
// and state_o (the code's MSB) must match exactly 4 cycles (one per layer)
// after the vector entered. Both predicted states must occur.
module tb_luna_logicnet;
  import luna_ref_pkg::*;
  localparam int unsigned NF = 56, NL = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          vi, vo, st;
  logic [NF-1:0] f;
  logic [1:0]    code;

  luna_logicnet dut (.clk, .rst_n, .valid_i(vi), .feat_i(f), .valid_o(vo), .code_o(code), .state_o(st));

  int unsigned width[] = '{145, 40, 15, 1};
  int unsigned fanin[] = '{7, 6, 6, 8};
  int unsigned inbits[] = '{1, 2, 2, 2};

  int checks = 0, failures = 0, cyc = 0, n0 = 0, n1 = 0;
  int unsigned qc[$];
  int qt[$];
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  always @(posedge clk) if (rst_n && vo) begin
    check(qt.size() > 0, "unexpected valid");
    if (qt.size() > 0) begin
      check(cyc - qt[0] == NL, $sformatf("latency %0d", cyc - qt[0]));
      check(int'(code) == int'(qc[0]), $sformatf("code %0d exp %0d", code, qc[0]));
      check(st == code[1], "state is not the code MSB");
      if (st) n1++; else n0++;
      void'(qc.pop_front()); void'(qt.pop_front());
    end
  end

  initial begin
    bit fb[];
    vi = 0; f = '0;
    fb = new[NF];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      vi = (t < 10) || ($urandom_range(0, 3) != 0);
      f = NF'({$urandom, $urandom});
      if (vi) begin
        foreach (fb[i]) fb[i] = f[i];
        qc.push_back(ref_net(NL, width, fanin, inbits, 2, fb));
        qt.push_back(cyc);
      end
    end
    @(negedge clk); vi = 0;
    repeat (NL + 3) @(negedge clk);
    check(qt.size() == 0, "results missing at the end");
    check(n0 > 0 && n1 > 0, $sformatf("only one state predicted (%0d zeros, %0d ones)", n0, n1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
