// tb_sl_decoder: every phase with random cluster / source-line selections;
// the levels of SEL, SL, RSTR, STR and CBL must equal the signal-settings
// table, spelled out literally here, for selected and unselected lines.
module tb_sl_decoder;
  import tlnv_pkg::*;

  localparam int M = 4, N = 60;

  phase_e       phase;
  logic [1:0]   cl_sel;
  logic [5:0]   sl_sel;
  level_e       sel_lv [M];
  level_e       sl_lv  [N];
  array_lines_t lines;
  int checks = 0, failures = 0;

  sl_decoder #(.M(M), .N(N)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s phase=%s", what, phase.name());
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    phase_e ph [9] = '{PH_IDLE, PH_ST1, PH_ST2, PH_RS_PRE, PH_RS_L_DIS,
                       PH_RS_L_AMP, PH_RS_R_DIS, PH_RS_R_AMP, PH_CIM};
    for (int n = 0; n < 9; n++)
      for (int rep = 0; rep < 4; rep++) begin
        level_e w_sel, w_slj, w_rstr1, w_rstr2, w_str1, w_str2, w_cbl;
        bit sel_ok, sl_ok;
        phase  = ph[n];
        cl_sel = 2'($urandom_range(0, M - 1));
        sl_sel = 6'($urandom_range(0, N - 1));
        #1;
        w_rstr1 = LV_GND; w_rstr2 = LV_GND; w_str1 = LV_GND; w_str2 = LV_GND;
        case (phase)
          PH_ST1:    begin w_sel = LV_VDDH; w_slj = LV_GND;  w_cbl = LV_VDDH; end
          PH_ST2:    begin w_sel = LV_VDDH; w_slj = LV_VDDH; w_cbl = LV_FLOAT;
                           w_str1 = LV_VDD; w_str2 = LV_VSTR; end
          PH_RS_PRE: begin w_sel = LV_GND;  w_slj = LV_VDDL; w_cbl = LV_FLOAT; end
          PH_RS_L_DIS, PH_RS_L_AMP:
                     begin w_sel = LV_VDD;  w_slj = LV_GND;  w_cbl = LV_FLOAT;
                           w_rstr1 = LV_VDD; end
          PH_RS_R_DIS, PH_RS_R_AMP:
                     begin w_sel = LV_VDD;  w_slj = LV_GND;  w_cbl = LV_FLOAT;
                           w_rstr1 = LV_VDD; w_rstr2 = LV_VDD; end
          default:   begin w_sel = LV_GND;  w_slj = LV_VDDL; w_cbl = LV_VDD; end
        endcase
        sel_ok = 1;
        for (int i = 0; i < M; i++)
          if (sel_lv[i] != ((i == cl_sel) ? w_sel : LV_GND)) sel_ok = 0;
        sl_ok = 1;
        for (int j = 0; j < N; j++)
          if (sl_lv[j] != ((j == sl_sel) ? w_slj : LV_VDDL)) sl_ok = 0;
        check(sel_ok, "SEL levels");
        check(sl_ok, "SL levels");
        check(lines.rstr1 == w_rstr1 && lines.rstr2 == w_rstr2, "RSTR levels");
        check(lines.str1 == w_str1 && lines.str2 == w_str2, "STR levels");
        check(lines.cbl == w_cbl, "CBL level");
        check(lines.vr1 == ((w_rstr1 == LV_VDD) ? LV_VDD : LV_GND) &&
              lines.vr2 == ((w_rstr2 == LV_VDD) ? LV_VDD : LV_GND), "V_R1/V_R2 switches");
        check(lines.cim == (phase == PH_CIM), "CIM hand-over");
        check(lines.wl_pre == (phase == PH_RS_PRE), "precharge wordlines");
        check((lines.rst == LV_VDDH) == (phase == PH_ST1), "RST in store phase 1");
        check(lines.ctrl1 == !(phase inside {PH_RS_PRE, PH_RS_L_DIS}), "CTRL1");
        check(lines.ctrl2 == !(phase inside {PH_RS_PRE, PH_RS_L_DIS, PH_RS_L_AMP, PH_RS_R_DIS}),
              "CTRL2");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
