// tlnv_array: behavioural model of the TL-nvSRAM-CIM cell array of one
// subarray (SRAM cells, cluster-nSnR TL-ReRAMs, restore paths, reference
// generators, differential computing paths and bitline driver).
//
// This is a behavioural model, not synthesizable circuitry: the real array is
// a transistor/ReRAM circuit whose operations are analog. The model keeps the
// paper's structure and its digital outcome, one clock edge per step:
//
//  * ROWS x COLS SRAM bits. Columns 2c and 2c+1 of a row form cell c: the
//    left SRAM holds Q1 and the right one Q2 of one weight trit
//    (+1 = 00, 0 = 10, -1 = 11). Cell c discharges compute bitline CBL c.
//  * Each cell owns M clusters of N TL-ReRAMs; the ReRAM R_i_j of every cell
//    sits on cluster select SEL_i and source line SL_j, so one (i, j) names
//    one trit in every cell of the array ("array-level parallelism").
//    Stored as 2 bits per device: LRS = +1, MRS = 0, HRS = -1.
//  * Store phase 1 (SEL_i = VDDH, SL_j = GND, CBL = RST = VDDH): every
//    selected ReRAM is reset to HRS.
//  * Store phase 2 (SEL_i = VDDH, SL_j = VDDH, STR1 = VDD, STR2 = VSTR): the
//    set current is the sum of a path enabled by QB1 (through STR1) and a path
//    enabled by QB2 (through the weaker STR2). Both paths -> LRS, one path ->
//    MRS, none -> stays HRS. A set never raises the resistance.
//  * Restore phase 1 (wordlines high, CTRL off): Q1 = Q2 = 1 in every cell.
//  * Restore phase 2: on the rising edge of CTRL1 (with RSTR1 = VDD, SEL_i =
//    VDD, SL_j = GND, reference supply V_R1 = VDD) Q1 resolves to 1 when the ReRAM resistance exceeds the
//    VREF1 reference, i.e. when it discharges Q1 less than the reference
//    discharges QB1. On the rising edge of CTRL2 (RSTR2 = V_R2 = VDD) Q2 resolves
//    against VREF2 when Q1 = 1 and against VREF3 when Q1 = 0.
//  * CIM mode (RST on): every active row adds to its cell's CBL one unit of
//    discharge for each conducting path: STR1(=INB2)&QB1, STR2(=INB1)&QB2,
//    IN1&Q1, IN2&Q2. One row therefore gives 1 - x*w units (0, 1 or 2), and
//    the CBL count stands for the voltage drop dV after the fixed discharge
//    time: count = active rows - sum(x*w).
//  * power_off clears the SRAM (volatile) and leaves the ReRAMs (non-volatile).
//
// The paper gives the circuit, the coding, the signal levels and the
// resistances (80k / 282k / 1M). The reference resistances (geometric means of
// neighbouring states, VREF3 = VREF1), the unit-current abstraction of the
// CBL, treating a never-programmed device as HRS and modelling power loss as
// all-zero SRAM are this design's choices.
//
// Interface: write port (wr_en, wr_row, wr_data) acts at the clock edge as the
// bitline driver writing one row; rd_data is a combinational read of rd_row.
// Store/restore act at clock edges while their line levels are present.
// cbl_cnt is combinational from the SRAM contents and the row drive.
module tlnv_array
  import tlnv_pkg::*;
#(
  parameter int ROWS     = 256,
  parameter int COLS     = 320,
  parameter int M        = 4,
  parameter int N        = 60,
  parameter int R_REF1_K = 150,   // between LRS and MRS
  parameter int R_REF2_K = 531,   // between MRS and HRS
  parameter int R_REF3_K = 150,   // Q1 = 0 case: only LRS remains
  parameter int NCBL     = COLS / 2,
  parameter int ROW_W    = $clog2(ROWS),
  parameter int CNT_W    = $clog2(2 * ROWS + 1)
) (
  input  logic               clk,
  input  logic               power_off,
  input  level_e             sel_lv [M],
  input  level_e             sl_lv  [N],
  input  array_lines_t       lines,
  input  row_drive_t         row_drv [ROWS],
  input  logic               wr_en,
  input  logic [ROW_W-1:0]   wr_row,
  input  logic [COLS-1:0]    wr_data,
  input  logic [ROW_W-1:0]   rd_row,
  output logic [COLS-1:0]    rd_data,
  output logic [CNT_W-1:0]   cbl_cnt [NCBL]
);
  localparam int CL_W = (M > 1) ? $clog2(M) : 1;
  localparam int SL_W = (N > 1) ? $clog2(N) : 1;

  logic [COLS-1:0] sram [ROWS];
  logic [COLS-1:0] rr   [M][N][ROWS];   // 2 bits (rstate_e) per cell

  // ---------------------------------------------------------------- selection
  logic [CL_W-1:0] cl_idx;
  logic [SL_W-1:0] sl_idx;
  level_e          sel_lvl, sl_lvl;
  logic            cl_any, sl_any;
  int              cl_cnt, sl_cnt;

  always_comb begin
    cl_idx = '0; sl_idx = '0; cl_any = 1'b0; sl_any = 1'b0;
    cl_cnt = 0;  sl_cnt = 0;
    for (int i = 0; i < M; i++)
      if (sel_lv[i] != LV_GND) begin
        cl_idx = CL_W'(i); cl_any = 1'b1; cl_cnt++;
      end
    for (int j = 0; j < N; j++)
      if (sl_lv[j] != LV_VDDL) begin
        sl_idx = SL_W'(j); sl_any = 1'b1; sl_cnt++;
      end
    sel_lvl = sel_lv[cl_idx];
    sl_lvl  = sl_lv[sl_idx];
  end

  wire do_reset   = cl_any && sl_any && sel_lvl == LV_VDDH && sl_lvl == LV_GND &&
                    lines.cbl == LV_VDDH && lines.rst == LV_VDDH;
  wire do_set     = cl_any && sl_any && sel_lvl == LV_VDDH && sl_lvl == LV_VDDH &&
                    lines.str1 == LV_VDD && lines.str2 == LV_VSTR;
  wire rd_path    = cl_any && sl_any && sel_lvl == LV_VDD && sl_lvl == LV_GND;

  logic ctrl1_q, ctrl2_q;
  wire  amp_left  = rd_path && lines.rstr1 == LV_VDD && lines.vr1 == LV_VDD &&
                    lines.ctrl1 && !ctrl1_q;
  wire  amp_right = rd_path && lines.rstr2 == LV_VDD && lines.vr2 == LV_VDD &&
                    lines.ctrl2 && !ctrl2_q;

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk) begin
    ctrl1_q <= lines.ctrl1;
    ctrl2_q <= lines.ctrl2;
    if (power_off) begin
      for (int r = 0; r < ROWS; r++) sram[r] <= '0;
    end else begin
      if (wr_en) sram[wr_row] <= wr_data;
      if (lines.wl_pre) begin
        for (int r = 0; r < ROWS; r++) sram[r] <= '1;
      end
      if (do_reset) begin
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < NCBL; c++) rr[cl_idx][sl_idx][r][2*c +: 2] <= RS_HRS;
      end
      if (do_set) begin
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < NCBL; c++) begin
            logic [1:0] cur, tgt;
            int paths;
            cur   = rr[cl_idx][sl_idx][r][2*c +: 2];
            paths = int'(!sram[r][2*c]) + int'(!sram[r][2*c+1]);
            tgt   = (paths == 2) ? RS_LRS : (paths == 1) ? RS_MRS : RS_UNF;
            if (tgt < cur) rr[cl_idx][sl_idx][r][2*c +: 2] <= tgt;
          end
      end
      if (amp_left) begin
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < NCBL; c++)
            sram[r][2*c] <= rstate_kohm(rstate_e'(rr[cl_idx][sl_idx][r][2*c +: 2])) > R_REF1_K;
      end
      if (amp_right) begin
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < NCBL; c++)
            sram[r][2*c+1] <= rstate_kohm(rstate_e'(rr[cl_idx][sl_idx][r][2*c +: 2])) >
                              (sram[r][2*c] ? R_REF2_K : R_REF3_K);
      end
    end
  end

  assign rd_data = sram[rd_row];

  // ---------------------------------------------------------------- CIM
  always_comb begin
    for (int c = 0; c < NCBL; c++) cbl_cnt[c] = '0;
    if (lines.cim && lines.rst == LV_VDD && !power_off) begin
      for (int r = 0; r < ROWS; r++) begin
        if (row_drv[r] != '0) begin
          for (int c = 0; c < NCBL; c++) begin
            cbl_cnt[c] = cbl_cnt[c]
                       + CNT_W'(row_drv[r].inb2 & !sram[r][2*c])     // STR1 = INB2, QB1
                       + CNT_W'(row_drv[r].inb1 & !sram[r][2*c+1])   // STR2 = INB1, QB2
                       + CNT_W'(row_drv[r].in1  &  sram[r][2*c])     // IN1, Q1
                       + CNT_W'(row_drv[r].in2  &  sram[r][2*c+1]);  // IN2, Q2
          end
        end
      end
    end
  end

  // Cluster-nSnR select: one cluster and one source line at a time.
  a_one_cluster: assert property (@(posedge clk) cl_cnt <= 1);
  a_one_sl:      assert property (@(posedge clk) sl_cnt <= 1);
endmodule
