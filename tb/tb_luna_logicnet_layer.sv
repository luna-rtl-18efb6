// tb_luna_logicnet_layer: self-checking test of one LogicNet layer at the
// size of the default first hidden layer (145 two-bit sources, 40 neurons of
// fan-in 6, two output bits each).
//
// Random source vectors are applied on random cycles; the reference model
// picks every neuron's six sources from the documented connectivity and
// evaluates its neuron. All 40 outputs are compared one cycle after entry.
module tb_luna_logicnet_layer;
  import luna_ref_pkg::*;
  localparam int unsigned L = 1, NI = 145, IB = 2, NO = 40, FI = 6, OB = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              vi, vo;
  logic [NI*IB-1:0]  x;
  logic [NO*OB-1:0]  y;

  luna_logicnet_layer dut (.clk, .rst_n, .valid_i(vi), .x_i(x), .valid_o(vo), .y_o(y));

  int checks = 0, failures = 0, cyc = 0;
  int unsigned qv[$][$];
  int qt[$];
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  always @(posedge clk) if (rst_n && vo) begin
    check(qt.size() > 0, "unexpected valid");
    if (qt.size() > 0) begin
      check(cyc - qt[0] == 1, $sformatf("latency %0d", cyc - qt[0]));
      for (int n = 0; n < int'(NO); n++)
        check(int'(y[n*OB +: OB]) == int'(qv[0][n]), $sformatf("neuron %0d = %0d exp %0d", n, y[n*OB +: OB], qv[0][n]));
      void'(qv.pop_front()); void'(qt.pop_front());
    end
  end

  initial begin
    int unsigned src[$], res[$];
    vi = 0; x = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      vi = ($urandom_range(0, 3) != 0);
      for (int b = 0; b < int'(NI * IB); b++) x[b] = 1'($urandom);
      if (vi) begin
        src = {};
        for (int s = 0; s < int'(NI); s++) src.push_back(32'(x[s*IB +: IB]));
        ref_layer(L, FI, IB, OB, NO, src, res);
        qv.push_back(res); qt.push_back(cyc);
      end
    end
    @(negedge clk); vi = 0;
    repeat (3) @(negedge clk);
    check(qt.size() == 0, "results missing at the end");
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
