// tb_luna_neq: exhaustive test of the NEQ truth-table lookup.
//
// Three NEQs of the default network are instantiated: an input-layer neuron
// (7 one-bit inputs, 7:2), a hidden neuron (6 two-bit inputs, 12:2) and the
// output neuron (8 two-bit inputs, 16:2). Every one of their 2^X input codes
// is applied and the output compared with the reference neuron, which
// rebuilds the neuron from its documented definition. The test also checks
// that each table uses more than one output code.
module tb_luna_neq;
  import luna_ref_pkg::*;

  logic [6:0]  x0;  logic [1:0] y0;
  logic [11:0] x1;  logic [1:0] y1;
  logic [15:0] x3;  logic [1:0] y3;

  luna_neq #(.LAYER(0), .INDEX(5), .FANIN(7), .INBITS(1), .OUTBITS(2)) u0 (.x(x0), .y(y0));
  luna_neq #(.LAYER(1), .INDEX(3), .FANIN(6), .INBITS(2), .OUTBITS(2)) u1 (.x(x1), .y(y1));
  luna_neq #(.LAYER(3), .INDEX(0), .FANIN(8), .INBITS(2), .OUTBITS(2)) u3 (.x(x3), .y(y3));

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic int unsigned expect_code(int unsigned l, int unsigned n, int unsigned fanin,
                                              int unsigned inbits, int unsigned code);
    int unsigned vals[$];
    for (int unsigned j = 0; j < fanin; j++) vals.push_back((code >> (j * inbits)) & ((1 << inbits) - 1));
    return ref_neuron(l, n, fanin, inbits, 2, vals);
  endfunction

  initial begin
    bit [3:0] seen0, seen1, seen3;
    seen0 = '0; seen1 = '0; seen3 = '0;
    for (int unsigned e = 0; e < (1 << 16); e++) begin
      x0 = 7'(e); x1 = 12'(e); x3 = 16'(e);
      #1;
      if (e < (1 << 7)) begin
        check(y0 == 2'(expect_code(0, 5, 7, 1, e)), $sformatf("L0 x=%0h y=%0d", e, y0));
        seen0[y0] = 1'b1;
      end
      if (e < (1 << 12)) begin
        check(y1 == 2'(expect_code(1, 3, 6, 2, e)), $sformatf("L1 x=%0h y=%0d", e, y1));
        seen1[y1] = 1'b1;
      end
      check(y3 == 2'(expect_code(3, 0, 8, 2, e)), $sformatf("L3 x=%0h y=%0d", e, y3));
      seen3[y3] = 1'b1;
    end
    check($countones(seen0) > 1 && $countones(seen1) > 1 && $countones(seen3) > 1,
          "a truth table is constant");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
