// tlnv_macro: TL-nvSRAM-CIM macro, NSUB subarrays (six in the paper, enough
// to hold all of ResNet-18 at 5-trit weights).
//
// Each subarray is a 256 x 320 TL-nvSRAM-CIM array with 4 clusters of 60
// three-level ReRAMs per cell and its own peripherals (tlnv_subarray). The
// macro broadcasts one command to all subarrays so that store, restore and CIM
// run in all of them at once, as the weight-mapping scheme assumes (weight
// blocks spread evenly over the subarrays and used in parallel). SRAM writes
// and reads go to the subarray named by wr_sub / rd_sub. Each subarray has its
// own activation vector and delivers NADC results per CIM operation.
//
// Interface: cmd_ready is the AND of the subarrays' ready flags; done and
// result_valid are taken from subarray 0 (all subarrays run in lockstep).
// in_sat / adc_sat are ORed over the subarrays. The broadcast scheme and the
// port set are this design's own; the paper gives the subarray count and
// content.
module tlnv_macro
  import tlnv_pkg::*;
#(
  parameter int NSUB     = 6,
  parameter int ROWS     = 256,
  parameter int COLS     = 320,
  parameter int M        = 4,
  parameter int N        = 60,
  parameter int ACT_ROWS = 16,
  parameter int NMUX     = 5,
  parameter int ADC_BITS = 5,
  parameter int ACC_W    = 24,
  parameter int NADC     = COLS / 2 / NMUX,
  parameter int ROW_W    = $clog2(ROWS),
  parameter int SUB_W    = (NSUB > 1) ? $clog2(NSUB) : 1,
  parameter int CL_W     = (M > 1) ? $clog2(M) : 1,
  parameter int SL_W     = (N > 1) ? $clog2(N) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      power_off,
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  cmd_e                      cmd,
  input  logic [CL_W-1:0]           cmd_cluster,
  input  logic [SL_W-1:0]           cmd_sl,
  output logic                      done,
  output phase_e                    phase,
  input  logic                      wr_en,
  input  logic [SUB_W-1:0]          wr_sub,
  input  logic [ROW_W-1:0]          wr_row,
  input  logic [COLS-1:0]           wr_data,
  input  logic [SUB_W-1:0]          rd_sub,
  input  logic [ROW_W-1:0]          rd_row,
  output logic [COLS-1:0]           rd_data,
  input  logic signed [IN_BITS-1:0] act [NSUB][ROWS],
  output logic signed [ACC_W-1:0]   result [NSUB][NADC],
  output logic                      result_valid,
  output logic                      in_sat,
  output logic                      adc_sat
);
  logic [NSUB-1:0] ready_v, done_v, rv_v, isat_v, asat_v;
  logic [COLS-1:0] rd_v [NSUB];
  phase_e          ph_v [NSUB];

  for (genvar s = 0; s < NSUB; s++) begin : g_sub
    tlnv_subarray #(
      .ROWS(ROWS), .COLS(COLS), .M(M), .N(N), .ACT_ROWS(ACT_ROWS),
      .NMUX(NMUX), .ADC_BITS(ADC_BITS), .ACC_W(ACC_W)
    ) u_sub (
      .clk, .rst_n, .power_off,
      .cmd_valid(cmd_valid && cmd_ready), .cmd_ready(ready_v[s]),
      .cmd, .cmd_cluster, .cmd_sl, .done(done_v[s]), .phase(ph_v[s]),
      .wr_en(wr_en && int'(wr_sub) == s), .wr_row, .wr_data,
      .rd_row, .rd_data(rd_v[s]),
      .act(act[s]), .result(result[s]), .result_valid(rv_v[s]),
      .in_sat(isat_v[s]), .adc_sat(asat_v[s])
    );
  end

  assign cmd_ready    = &ready_v;
  assign done         = done_v[0];
  assign phase        = ph_v[0];
  assign result_valid = rv_v[0];
  assign rd_data      = rd_v[rd_sub];
  assign in_sat       = |isat_v;
  assign adc_sat      = |asat_v;
endmodule
