// array_ctrl: array signal controller of one subarray.
//
// Accepts one command at a time (valid/ready) and walks the array through its
// phases:
//  * STORE (cluster i, source line j): store phase 1 for T_ST1 cycles (every
//    selected ReRAM reset to HRS), then store phase 2 for T_ST2 cycles
//    (conditional set from the SRAM pair). Whole-array parallel.
//  * RESTORE (i, j): precharge for T_PRE cycles, then left-bit discharge and
//    amplify (T_DIS, T_AMP), then right-bit discharge and amplify. Whole-array
//    parallel.
//  * CIM: the ternary MAC schedule of the paper's throughput figure. The outer
//    loop runs over the input trits (most significant first), the inner loop
//    over the compute blocks, so CB b sees trit i in CIM cycle b + NCB*i. Each
//    CIM cycle lasts NMUX clocks: the 5:1 MUX walks the five CBLs of one
//    weight (most significant weight trit first) while one ADC sample per
//    clock is taken. 5 x 16 x 5 = 400 clocks at the paper's sizes.
// The phase durations are not in the paper; they are parameters here.
//
// Interface: cmd_ready is high in idle; a command is taken when cmd_valid and
// cmd_ready are both high and must stay stable while it waits. done pulses
// for one clock in the cycle after the last cycle of the operation. For CIM,
// sample and the tag outputs (k_first, k_last, cb_first, trit_first, last)
// describe the ADC sample taken at the end of the current clock.
module array_ctrl
  import tlnv_pkg::*;
#(
  parameter int M     = 4,
  parameter int N     = 60,
  parameter int NCB   = 16,   // compute blocks per subarray
  parameter int NMUX  = 5,    // CBLs per ADC
  parameter int T_ST1 = 2,
  parameter int T_ST2 = 2,
  parameter int T_PRE = 2,
  parameter int T_DIS = 2,
  parameter int T_AMP = 1,
  parameter int CL_W  = (M > 1) ? $clog2(M) : 1,
  parameter int SL_W  = (N > 1) ? $clog2(N) : 1,
  parameter int CB_W  = (NCB > 1) ? $clog2(NCB) : 1,
  parameter int MX_W  = (NMUX > 1) ? $clog2(NMUX) : 1,
  parameter int TS_W  = $clog2(TRITS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  cmd_e            cmd,
  input  logic [CL_W-1:0] cmd_cluster,
  input  logic [SL_W-1:0] cmd_sl,
  output phase_e          phase,
  output logic [CL_W-1:0] cl_sel,
  output logic [SL_W-1:0] sl_sel,
  output logic            done,
  // CIM schedule
  output logic            cim_en,
  output logic [CB_W-1:0] cb_sel,
  output logic [TS_W-1:0] trit_sel,
  output logic [MX_W-1:0] mux_sel,
  output logic            sample,
  output logic            k_first,
  output logic            k_last,
  output logic            cb_first,
  output logic            trit_first,
  output logic            last
);
  localparam int TMAX = (T_ST1 > T_ST2 ? T_ST1 : T_ST2) + T_PRE + T_DIS + T_AMP;
  localparam int TM_W = $clog2(TMAX + 1);

  logic [TM_W-1:0] timer;
  logic [CB_W-1:0] cb_q;
  logic [TS_W-1:0] ti_q;     // input trit step, 0 = most significant
  logic [MX_W-1:0] mx_q;

  function automatic logic [TM_W-1:0] dur(int t);
    return TM_W'(t - 1);
  endfunction

  assign cmd_ready = (phase == PH_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase  <= PH_IDLE;
      timer  <= '0;
      cl_sel <= '0;
      sl_sel <= '0;
      cb_q   <= '0;
      ti_q   <= '0;
      mx_q   <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (phase == PH_IDLE) begin
        if (cmd_valid) begin
          cl_sel <= cmd_cluster;
          sl_sel <= cmd_sl;
          cb_q   <= '0;
          ti_q   <= '0;
          mx_q   <= '0;
          unique case (cmd)
            CMD_STORE:   begin phase <= PH_ST1;    timer <= dur(T_ST1); end
            CMD_RESTORE: begin phase <= PH_RS_PRE; timer <= dur(T_PRE); end
            default:     begin phase <= PH_CIM;    timer <= '0;         end
          endcase
        end
      end else if (phase == PH_CIM) begin
        if (int'(mx_q) == NMUX - 1) begin
          mx_q <= '0;
          if (int'(cb_q) == NCB - 1) begin
            cb_q <= '0;
            if (int'(ti_q) == TRITS - 1) begin
              phase <= PH_IDLE;
              done  <= 1'b1;
            end else begin
              ti_q <= ti_q + 1'b1;
            end
          end else begin
            cb_q <= cb_q + 1'b1;
          end
        end else begin
          mx_q <= mx_q + 1'b1;
        end
      end else if (timer != '0) begin
        timer <= timer - 1'b1;
      end else begin
        unique case (phase)
          PH_ST1:      begin phase <= PH_ST2;      timer <= dur(T_ST2); end
          PH_RS_PRE:   begin phase <= PH_RS_L_DIS; timer <= dur(T_DIS); end
          PH_RS_L_DIS: begin phase <= PH_RS_L_AMP; timer <= dur(T_AMP); end
          PH_RS_L_AMP: begin phase <= PH_RS_R_DIS; timer <= dur(T_DIS); end
          PH_RS_R_DIS: begin phase <= PH_RS_R_AMP; timer <= dur(T_AMP); end
          default:     begin phase <= PH_IDLE;     done  <= 1'b1;       end
        endcase
      end
    end
  end

  assign cim_en     = (phase == PH_CIM);
  assign cb_sel     = cb_q;
  assign trit_sel   = TS_W'(TRITS - 1 - int'(ti_q));
  assign mux_sel    = mx_q;
  assign sample     = cim_en;
  assign k_first    = (mx_q == '0);
  assign k_last     = (int'(mx_q) == NMUX - 1);
  assign cb_first   = (cb_q == '0);
  assign trit_first = (ti_q == '0);
  assign last       = cim_en && k_last && (int'(cb_q) == NCB - 1) &&
                      (int'(ti_q) == TRITS - 1);

  // A waiting command must hold still; indices must address a real device.
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
      cmd_valid && !cmd_ready |=> $stable(cmd) && $stable(cmd_cluster) && $stable(cmd_sl));
  a_cl_range: assert property (@(posedge clk) disable iff (!rst_n)
      cmd_valid && cmd_ready |-> int'(cmd_cluster) < M && int'(cmd_sl) < N);
endmodule
