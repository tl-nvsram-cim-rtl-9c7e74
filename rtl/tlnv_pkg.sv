// tlnv_pkg: types and constants shared by the TL-nvSRAM-CIM macro.
//
// The macro stores balanced-ternary weights in three-level ReRAMs (TL-ReRAMs)
// and copies them into pairs of SRAM cells before computing. This package holds
// the codings all blocks agree on:
//  * a trit as a 2-bit signed value (-1, 0, +1);
//  * the ReRAM state of one trit (LRS = +1, MRS = 0, HRS = -1), with the nominal
//    resistances 80 kOhm / 282 kOhm / 1 MOhm given for the devices;
//  * the SRAM pair coding Q1/Q2 of a weight trit and the IN1/IN2 (INB1/INB2)
//    coding of an input trit, both as in the paper's coding table;
//  * a symbolic voltage level, so that the controller can drive each line of
//    the array with the level the paper's signal-settings table prescribes
//    (GND, VDDL = 0.6 V, VSTR = 0.31 V, VDD = 0.9 V, VDDH = 1.5 V, floating);
//  * the fine-grained phase of an array operation.
// The reference resistances used for sensing are this design's choice (the
// paper only says they come from serially connected ReRAMs).
package tlnv_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int TRITS    = 5;    // trits per weight and per input (8b -> 5t)
  localparam int IN_BITS  = 8;    // binary activation width

  // ---------------------------------------------------------------- codings
  typedef logic signed [1:0] trit_t;   // -1, 0, +1 (2'b10 is never used)

  // ReRAM state of one TL-ReRAM, 2 bits per device in the state arrays.
  typedef enum logic [1:0] {
    RS_LRS = 2'd0,   // +1
    RS_MRS = 2'd1,   //  0
    RS_HRS = 2'd2,   // -1
    RS_UNF = 2'd3    // never programmed: senses like HRS
  } rstate_e;

  // Nominal resistances in kOhm (paper: LRS 80k, MRS 282k, HRS 1M).
  localparam int R_LRS_K = 80;
  localparam int R_MRS_K = 282;
  localparam int R_HRS_K = 1000;

  // Input drive of one row: IN1/IN2 and the complements INB1/INB2.
  // A row that is not activated has all four low.
  typedef struct packed {
    logic in1;
    logic in2;
    logic inb1;
    logic inb2;
  } row_drive_t;

  // Symbolic voltage levels of the array control lines.
  typedef enum logic [2:0] {
    LV_GND   = 3'd0,
    LV_VSTR  = 3'd1,   // 0.31 V, weak set path in store phase 2
    LV_VDDL  = 3'd2,   // 0.6 V
    LV_VDD   = 3'd3,   // 0.9 V
    LV_VDDH  = 3'd4,   // 1.5 V
    LV_FLOAT = 3'd5
  } level_e;

  // Phase of the array, one per distinct row of the signal-settings table
  // (restore phase 2 split into its four visible steps).
  typedef enum logic [3:0] {
    PH_IDLE     = 4'd0,
    PH_ST1      = 4'd1,  // store phase 1: reset selected ReRAMs to HRS
    PH_ST2      = 4'd2,  // store phase 2: conditional set
    PH_RS_PRE   = 4'd3,  // restore phase 1: precharge, Q1 = Q2 = 1
    PH_RS_L_DIS = 4'd4,  // restore phase 2: left bit discharge (RSTR1)
    PH_RS_L_AMP = 4'd5,  // restore phase 2: left bit amplify (CTRL1)
    PH_RS_R_DIS = 4'd6,  // restore phase 2: right bit discharge (RSTR2)
    PH_RS_R_AMP = 4'd7,  // restore phase 2: right bit amplify (CTRL2)
    PH_CIM      = 4'd8   // CIM mode: ternary MAC
  } phase_e;

  // Commands accepted by the array controller.
  typedef enum logic [1:0] {
    CMD_STORE   = 2'd0,
    CMD_RESTORE = 2'd1,
    CMD_CIM     = 2'd2
  } cmd_e;

  // Lines shared by the whole array (row- or column-parallel in the paper).
  typedef struct packed {
    level_e rstr1;
    level_e rstr2;
    level_e str1;       // store mode level; in CIM mode STR1 follows INB2
    level_e str2;       // store mode level; in CIM mode STR2 follows INB1
    level_e cbl;
    level_e rst;
    level_e vr1;        // bottom of the VREF1 generator, GND or VDD by RSTR1
    level_e vr2;        // bottom of the VREF2/VREF3 generators, by RSTR2
    logic   ctrl1;      // column footer of the left SRAM (N24)
    logic   ctrl2;      // column footer of the right SRAM (N25)
    logic   wl_pre;     // all wordlines high with bitlines precharged
    logic   cim;        // STR lines handed to the input driver
  } array_lines_t;

  // ---------------------------------------------------------------- helpers
  function automatic row_drive_t trit_to_drive(trit_t t);
    row_drive_t d;
    unique case (t)
      2'sd1:   d = '{in1: 1'b1, in2: 1'b1, inb1: 1'b0, inb2: 1'b0};
      2'sd0:   d = '{in1: 1'b1, in2: 1'b0, inb1: 1'b0, inb2: 1'b1};
      default: d = '{in1: 1'b0, in2: 1'b0, inb1: 1'b1, inb2: 1'b1};
    endcase
    return d;
  endfunction

  // SRAM pair coding of a weight trit: {Q1,Q2}
  function automatic logic [1:0] trit_to_q(trit_t t);
    unique case (t)
      2'sd1:   return 2'b00;
      2'sd0:   return 2'b10;
      default: return 2'b11;
    endcase
  endfunction

  // {Q1,Q2} back to a trit (01 is not a legal code; read as 0)
  function automatic trit_t q_to_trit(logic [1:0] q);
    unique case (q)
      2'b00:   return 2'sd1;
      2'b11:   return -2'sd1;
      default: return 2'sd0;
    endcase
  endfunction

  function automatic int rstate_kohm(rstate_e s);
    unique case (s)
      RS_LRS:  return R_LRS_K;
      RS_MRS:  return R_MRS_K;
      default: return R_HRS_K;
    endcase
  endfunction

endpackage
