// sl_decoder: SL / RSTR / cluster-select decoder of one subarray.
//
// Turns "which phase, which cluster i, which source line j" into the voltage
// level of every array control line, following the paper's signal-settings
// table row by row:
//
//   phase          SEL_i  SL_j  SL_x  RSTR1/2   STR1 STR2  CBL    RST   CTRL1/2
//   store 1        VDDH   GND   VDDL  GND       GND  GND   VDDH   VDDH  1/1
//   store 2        VDDH   VDDH  VDDL  GND       VDD  VSTR  float  GND   1/1
//   restore 1      GND    VDDL  VDDL  GND       GND  GND   float  GND   0/0 + WL
//   restore 2 L    VDD    GND   VDDL  VDD/GND   GND  GND   float  GND   0->1 / 0
//   restore 2 R    VDD    GND   VDDL  VDD/VDD   GND  GND   float  GND   1 / 0->1
//   CIM            GND    VDDL  VDDL  GND       INB2 INB1  MAC    VDD   1/1
//
// SEL of unselected clusters is GND. The reference-generator supplies V_R1 and
// V_R2 follow RSTR1 and RSTR2 (GND when low, VDD when high), as the 2:1
// switches shared by the array in the cell schematic show. SEL_i, SL_j, SL_x, RSTR, STR and CBL
// levels are the paper's. The RST level outside store phase 1, the CTRL
// footers outside restore (kept on so that the latches hold their data), the
// idle levels and the split of restore phase 2 into discharge/amplify steps
// for each bit are this design's choices, read from the operation description.
//
// Interface: purely combinational.
module sl_decoder
  import tlnv_pkg::*;
#(
  parameter int M    = 4,    // clusters per cell
  parameter int N    = 60,   // TL-ReRAMs per cluster (source lines)
  parameter int CL_W = (M > 1) ? $clog2(M) : 1,
  parameter int SL_W = (N > 1) ? $clog2(N) : 1
) (
  input  phase_e          phase,
  input  logic [CL_W-1:0] cl_sel,
  input  logic [SL_W-1:0] sl_sel,
  output level_e          sel_lv [M],
  output level_e          sl_lv  [N],
  output array_lines_t    lines
);
  always_comb begin
    level_e sel_on, slj, slx;
    sel_on = LV_GND;
    slj    = LV_VDDL;
    slx    = LV_VDDL;
    lines  = '{rstr1: LV_GND, rstr2: LV_GND, str1: LV_GND, str2: LV_GND,
               cbl: LV_VDD, rst: LV_GND, vr1: LV_GND, vr2: LV_GND,
               ctrl1: 1'b1, ctrl2: 1'b1,
               wl_pre: 1'b0, cim: 1'b0};
    unique case (phase)
      PH_ST1: begin
        sel_on = LV_VDDH; slj = LV_GND;
        lines.cbl = LV_VDDH; lines.rst = LV_VDDH;
      end
      PH_ST2: begin
        sel_on = LV_VDDH; slj = LV_VDDH;
        lines.str1 = LV_VDD; lines.str2 = LV_VSTR; lines.cbl = LV_FLOAT;
      end
      PH_RS_PRE: begin
        lines.cbl = LV_FLOAT; lines.ctrl1 = 1'b0; lines.ctrl2 = 1'b0;
        lines.wl_pre = 1'b1;
      end
      PH_RS_L_DIS, PH_RS_L_AMP: begin
        sel_on = LV_VDD; slj = LV_GND;
        lines.rstr1 = LV_VDD; lines.cbl = LV_FLOAT;
        lines.ctrl1 = (phase == PH_RS_L_AMP); lines.ctrl2 = 1'b0;
      end
      PH_RS_R_DIS, PH_RS_R_AMP: begin
        sel_on = LV_VDD; slj = LV_GND;
        lines.rstr1 = LV_VDD; lines.rstr2 = LV_VDD; lines.cbl = LV_FLOAT;
        lines.ctrl1 = 1'b1; lines.ctrl2 = (phase == PH_RS_R_AMP);
      end
      PH_CIM: begin
        lines.rst = LV_VDD; lines.cim = 1'b1;
      end
      default: ;
    endcase
    // V_R1 / V_R2: array-shared 2:1 switches, GND when RSTR is low, VDD when high
    lines.vr1 = (lines.rstr1 == LV_VDD) ? LV_VDD : LV_GND;
    lines.vr2 = (lines.rstr2 == LV_VDD) ? LV_VDD : LV_GND;
    for (int i = 0; i < M; i++) sel_lv[i] = (i == int'(cl_sel)) ? sel_on : LV_GND;
    for (int j = 0; j < N; j++) sl_lv[j]  = (j == int'(sl_sel)) ? slj : slx;
  end
endmodule
