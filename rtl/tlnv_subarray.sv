// tlnv_subarray: one TL-nvSRAM-CIM subarray.
//
// A ROWS x COLS SRAM array (256 x 320 in the paper) whose cells each carry
// M clusters of N three-level ReRAMs, with its peripherals: the wordline /
// ternary input driver on the rows, the SL/RSTR/cluster-select decoder, the
// array signal controller, and per group of NMUX compute bitlines one MUX/ADC
// and one shift & adder. 320 columns form 160 cells (two SRAM columns per
// weight trit) and 160 CBLs, read by 32 ADCs; every ADC delivers one output:
// the dot product of the ROWS 5-trit activations with a column of 5-trit
// weights stored in five neighbouring cells, most significant trit leftmost.
//
// Operation:
//  * Weights are written into the SRAM through the write port, one row per
//    clock (bitline driver). STORE copies the whole SRAM into ReRAM (i, j) of
//    every cell; RESTORE copies ReRAM (i, j) back into the SRAM. Both are
//    array-parallel and take a handful of clocks (see array_ctrl).
//  * CIM computes all NADC outputs in TRITS x NCB x NMUX clocks (400 at the
//    paper's sizes), plus one clock of ADC and one of shift & adder latency.
//    result_valid pulses when the results are ready.
//  * power_off drops the SRAM contents; the ReRAMs keep theirs.
//  * The write port may only be used while the controller is idle (asserted):
//    a store copies the SRAM as it is during store phase 2.
//
// The split into blocks follows the paper's macro figure; the clocked
// sequencing, the write/read ports and the result interface are this
// design's own.
module tlnv_subarray
  import tlnv_pkg::*;
#(
  parameter int ROWS     = 256,
  parameter int COLS     = 320,
  parameter int M        = 4,
  parameter int N        = 60,
  parameter int ACT_ROWS = 16,
  parameter int NMUX     = 5,
  parameter int ADC_BITS = 5,
  parameter int ACC_W    = 24,
  parameter int NCBL     = COLS / 2,
  parameter int NADC     = NCBL / NMUX,
  parameter int NCB      = ROWS / ACT_ROWS,
  parameter int ROW_W    = $clog2(ROWS),
  parameter int CL_W     = (M > 1) ? $clog2(M) : 1,
  parameter int SL_W     = (N > 1) ? $clog2(N) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      power_off,
  // command
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  cmd_e                      cmd,
  input  logic [CL_W-1:0]           cmd_cluster,
  input  logic [SL_W-1:0]           cmd_sl,
  output logic                      done,
  output phase_e                    phase,
  // SRAM write / read (bitline driver)
  input  logic                      wr_en,
  input  logic [ROW_W-1:0]          wr_row,
  input  logic [COLS-1:0]           wr_data,
  input  logic [ROW_W-1:0]          rd_row,
  output logic [COLS-1:0]           rd_data,
  // activations and results
  input  logic signed [IN_BITS-1:0] act [ROWS],
  output logic signed [ACC_W-1:0]   result [NADC],
  output logic                      result_valid,
  output logic                      in_sat,
  output logic                      adc_sat
);
  localparam int CNT_W = $clog2(2 * ROWS + 1);
  localparam int CB_W  = (NCB > 1) ? $clog2(NCB) : 1;
  localparam int MX_W  = (NMUX > 1) ? $clog2(NMUX) : 1;
  localparam int TS_W  = $clog2(TRITS);

  logic [CL_W-1:0] cl_sel;
  logic [SL_W-1:0] sl_sel;
  logic            cim_en, sample;
  logic [CB_W-1:0] cb_sel;
  logic [TS_W-1:0] trit_sel;
  logic [MX_W-1:0] mux_sel;
  logic            k_first, k_last, cb_first, trit_first, last;

  array_ctrl #(
    .M(M), .N(N), .NCB(NCB), .NMUX(NMUX)
  ) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_cluster, .cmd_sl,
    .phase, .cl_sel, .sl_sel, .done,
    .cim_en, .cb_sel, .trit_sel, .mux_sel, .sample,
    .k_first, .k_last, .cb_first, .trit_first, .last
  );

  level_e       sel_lv [M];
  level_e       sl_lv  [N];
  array_lines_t lines;

  sl_decoder #(.M(M), .N(N)) u_dec (
    .phase, .cl_sel, .sl_sel, .sel_lv, .sl_lv, .lines
  );

  row_drive_t row_drv [ROWS];

  input_driver #(.ROWS(ROWS), .ACT_ROWS(ACT_ROWS)) u_drv (
    .act, .en(cim_en), .cb_sel, .trit_sel, .row_drv, .sat(in_sat)
  );

  logic [CNT_W-1:0] cbl_cnt [NCBL];

  tlnv_array #(.ROWS(ROWS), .COLS(COLS), .M(M), .N(N)) u_array (
    .clk, .power_off, .sel_lv, .sl_lv, .lines, .row_drv,
    .wr_en, .wr_row, .wr_data, .rd_row, .rd_data, .cbl_cnt
  );

  // Tags follow the sample through the one-clock ADC.
  logic t_k_first, t_k_last, t_cb_first, t_trit_first, t_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {t_k_first, t_k_last, t_cb_first, t_trit_first, t_last} <= '0;
    end else begin
      {t_k_first, t_k_last, t_cb_first, t_trit_first, t_last} <=
        {k_first, k_last, cb_first, trit_first, last};
    end
  end

  logic [NADC-1:0] sat_v, rv_v;

  for (genvar a = 0; a < NADC; a++) begin : g_col
    logic [CNT_W-1:0]    cbl_grp [NMUX];
    logic [ADC_BITS-1:0] code;
    logic                code_valid;

    for (genvar k = 0; k < NMUX; k++) begin : g_grp
      assign cbl_grp[k] = cbl_cnt[a * NMUX + k];
    end

    mux_adc #(.NMUX(NMUX), .CNT_W(CNT_W), .ADC_BITS(ADC_BITS)) u_adc (
      .clk, .rst_n, .cbl(cbl_grp), .sel(mux_sel), .sample,
      .code, .code_valid, .sat(sat_v[a])
    );

    shift_adder #(.ACT_ROWS(ACT_ROWS), .ADC_BITS(ADC_BITS), .ACC_W(ACC_W)) u_sa (
      .clk, .rst_n, .code, .code_valid,
      .k_first(t_k_first), .k_last(t_k_last), .cb_first(t_cb_first),
      .trit_first(t_trit_first), .last(t_last),
      .result(result[a]), .result_valid(rv_v[a])
    );
  end

  assign result_valid = rv_v[0];
  assign adc_sat      = |sat_v;

  // The SRAM belongs to the controller while an operation runs.
  a_write_idle: assert property (@(posedge clk) disable iff (!rst_n)
      wr_en |-> phase == PH_IDLE);
endmodule
