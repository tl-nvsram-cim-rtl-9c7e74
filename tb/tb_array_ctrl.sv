// tb_array_ctrl: issues STORE, RESTORE and CIM commands and checks
//  * the phase sequence and the number of clocks spent in each phase,
//  * that the selected cluster / source line are latched with the command,
//  * the CIM schedule: sample n is (input trit n/80, MST first; block
//    (n/5)%16; MUX n%5) with the matching tags, 400 samples in all,
//  * done one clock after the last cycle, ready only in idle.
module tb_array_ctrl;
  import tlnv_pkg::*;

  localparam int T_ST1 = 3, T_ST2 = 2, T_PRE = 2, T_DIS = 3, T_AMP = 1;

  logic       clk = 0, rst_n = 0;
  logic       cmd_valid, cmd_ready, done;
  cmd_e       cmd;
  logic [1:0] cmd_cluster, cl_sel;
  logic [5:0] cmd_sl, sl_sel;
  phase_e     phase;
  logic       cim_en, sample, k_first, k_last, cb_first, trit_first, last;
  logic [3:0] cb_sel;
  logic [2:0] trit_sel, mux_sel;
  int checks = 0, failures = 0;

  array_ctrl #(.M(4), .N(60), .NCB(16), .NMUX(5), .T_ST1(T_ST1), .T_ST2(T_ST2),
               .T_PRE(T_PRE), .T_DIS(T_DIS), .T_AMP(T_AMP)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(cmd_e c, int cl, int sl);
    @(negedge clk);
    check(cmd_ready, "ready before command");
    cmd = c; cmd_cluster = 2'(cl); cmd_sl = 6'(sl); cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    check(cl_sel == 2'(cl) && sl_sel == 6'(sl), "selection latched");
  endtask

  // expects phases ph[0..n-1] for len[0..n-1] clocks each, then done + idle
  task automatic expect_seq(phase_e ph [], int len []);
    for (int s = 0; s < ph.size(); s++)
      for (int c = 0; c < len[s]; c++) begin
        check(phase == ph[s], $sformatf("phase %s step %0d", ph[s].name(), c));
        check(!cmd_ready && !done, "busy");
        @(negedge clk);
      end
    check(phase == PH_IDLE && done, "done after sequence");
    @(negedge clk);
    check(!done, "done is one pulse");
  endtask

  initial begin
    cmd_valid = 0; cmd = CMD_STORE; cmd_cluster = 0; cmd_sl = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    issue(CMD_STORE, 2, 41);
    expect_seq('{PH_ST1, PH_ST2}, '{T_ST1, T_ST2});
    issue(CMD_RESTORE, 3, 59);
    expect_seq('{PH_RS_PRE, PH_RS_L_DIS, PH_RS_L_AMP, PH_RS_R_DIS, PH_RS_R_AMP},
               '{T_PRE, T_DIS, T_AMP, T_DIS, T_AMP});
    issue(CMD_CIM, 0, 0);
    for (int n = 0; n < 400; n++) begin
      int i, b, k;
      i = n / 80; b = (n / 5) % 16; k = n % 5;
      check(cim_en && sample && phase == PH_CIM, "CIM active");
      check(int'(trit_sel) == 4 - i && int'(cb_sel) == b && int'(mux_sel) == k,
            $sformatf("schedule n=%0d", n));
      check(k_first == (k == 0) && k_last == (k == 4) && cb_first == (b == 0) &&
            trit_first == (i == 0) && last == (n == 399), "tags");
      @(negedge clk);
    end
    check(phase == PH_IDLE && done && !sample, "CIM done after 400 clocks");
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
