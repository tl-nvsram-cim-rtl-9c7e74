// input_driver: wordline driver and ternary input driver of one subarray.
//
// A subarray of ROWS rows is cut into compute blocks (CBs) of ACT_ROWS rows;
// only one CB is activated per CIM cycle so that the column sum stays within
// the ADC range (16 rows in the paper, 16 CBs for 256 rows). The paper shares
// one ternary encoder among 16 rows; here encoder k serves row k of every CB
// (rows k, k+16, k+32, ...), so ACT_ROWS encoders drive the active CB in
// parallel. That assignment is this design's reading of "shared by 16 rows".
//
// Each CIM cycle, for the selected CB (cb_sel) and input trit (trit_sel), the
// active rows get IN1/IN2/INB1/INB2 of that trit of their activation; all
// other rows are held at 0/0/0/0, which opens every computing path (the row
// does not take part). The CIM-mode STR lines (STR1 = INB2, STR2 = INB1) are
// derived from the same drive inside the array.
//
// Interface: combinational from act/cb_sel/trit_sel/en to row_drv; the
// activations must be stable for the whole CIM operation. sat is high when an
// active row's activation was clipped to the 5-trit range.
module input_driver
  import tlnv_pkg::*;
#(
  parameter int ROWS     = 256,
  parameter int ACT_ROWS = 16,
  parameter int NCB      = ROWS / ACT_ROWS,
  parameter int CB_W     = (NCB > 1) ? $clog2(NCB) : 1,
  parameter int TS_W     = $clog2(TRITS)
) (
  input  logic signed [IN_BITS-1:0] act [ROWS],
  input  logic                      en,
  input  logic [CB_W-1:0]           cb_sel,
  input  logic [TS_W-1:0]           trit_sel,
  output row_drive_t                row_drv [ROWS],
  output logic                      sat
);
  trit_t             enc_trit  [ACT_ROWS][TRITS];
  row_drive_t        enc_drive [ACT_ROWS][TRITS];
  logic              enc_sat   [ACT_ROWS];
  logic signed [IN_BITS-1:0] enc_in [ACT_ROWS];

  for (genvar k = 0; k < ACT_ROWS; k++) begin : g_enc
    assign enc_in[k] = act[int'(cb_sel) * ACT_ROWS + k];
    ternary_encoder #(.W(IN_BITS), .T(TRITS)) u_enc (
      .x     (enc_in[k]),
      .trit  (enc_trit[k]),
      .drive (enc_drive[k]),
      .sat   (enc_sat[k])
    );
  end

  always_comb begin
    sat = 1'b0;
    for (int r = 0; r < ROWS; r++) row_drv[r] = '0;
    if (en) begin
      for (int k = 0; k < ACT_ROWS; k++) begin
        row_drv[int'(cb_sel) * ACT_ROWS + k] = enc_drive[k][trit_sel];
        sat |= enc_sat[k];
      end
    end
  end
endmodule
