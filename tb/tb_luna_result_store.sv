// tb_luna_result_store: self-checking test of the prediction memory.
//
// An 8-word store is fed random predictions on random cycles for long enough
// that the write pointer wraps several times. Each prediction must be
// written exactly two cycles after it is presented (saved_o, last_state_o),
// land in the word named by the write pointer, and be read back unchanged
// through the read port; the pointer must advance by one per saved result
// and wrap from 7 to 0.
module tb_luna_result_store;
  localparam int unsigned D = 8, CW = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          vi, st, saved, lst;
  logic [CW-1:0] code;
  logic [2:0]    wp, ra;
  logic [CW:0]   rd;

  luna_result_store #(.DEPTH(D), .CODE_W(CW)) dut (
    .clk, .rst_n, .valid_i(vi), .state_i(st), .code_i(code), .saved_o(saved),
    .last_state_o(lst), .wr_ptr_o(wp), .rd_addr_i(ra), .rd_data_o(rd));

  int checks = 0, failures = 0, cyc = 0, nsaved = 0, wraps = 0;
  int qd[$], qt[$];
  int model_wp = 0;
  int shadow[D];
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (saved) begin
      check(qt.size() > 0, "unexpected saved_o");
      if (qt.size() > 0) begin
        check(cyc - qt[0] == 2, $sformatf("save latency %0d", cyc - qt[0]));
        check(lst == 1'(qd[0] >> CW), "last_state_o");
        shadow[model_wp] = qd[0];
        if (model_wp == D - 1) wraps++;
        model_wp = (model_wp + 1) % D;
        void'(qd.pop_front()); void'(qt.pop_front());
        nsaved++;
      end
    end
    check(32'(wp) == model_wp, $sformatf("write pointer %0d exp %0d", wp, model_wp));
    if (nsaved >= int'(D))
      check(int'(rd) == shadow[ra], $sformatf("mem[%0d]=%0d exp %0d", ra, rd, shadow[ra]));
  end

  initial begin
    vi = 0; st = 0; code = '0; ra = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(wp == 0 && !saved, "state after reset");
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      ra = 3'($urandom_range(0, D - 1));   // read back on the next edge
      vi = 1'($urandom_range(0, 1));
      st = 1'($urandom);
      code = CW'($urandom);
      if (vi) begin qd.push_back(32'({st, code})); qt.push_back(cyc); end
    end
    @(negedge clk); vi = 0;
    repeat (4) @(negedge clk);
    check(qt.size() == 0, "results missing at the end");
    check(wraps >= 2, $sformatf("pointer wrapped %0d times", wraps));
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
