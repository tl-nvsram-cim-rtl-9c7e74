// tb_tlnv_macro: end-to-end run of the full macro at its default sizes
// (6 subarrays of 256 x 320 cells, 4 clusters x 60 TL-ReRAMs per cell).
//
//  1. Write weight set A into every subarray, STORE it to ReRAM (1,10);
//     the next command (STORE of set B to (3,59)) is presented while the
//     macro is busy and must wait (handshake stall).
//  2. Power off: SRAM lost. RESTORE (1,10); read back all rows.
//  3. CIM with random activations per subarray; compare the 6 x 32 results
//     with a reference that replays the 5-bit ADC clipping, and with the
//     exact dot product where nothing clipped. Subarray 0 is given a block
//     that drives a CBL to 32 (ADC saturation); activations beyond +-121
//     exercise input clipping.
//  4. RESTORE (3,59) (a different cluster and source line), CIM again.
// Each mechanism is counted and a mechanism that never happened is a failure.
module tb_tlnv_macro;
  import tlnv_pkg::*;

  localparam int NSUB = 6, ROWS = 256, COLS = 320, NC = COLS / 2, NADC = NC / 5;

  logic               clk = 0, rst_n = 0, power_off = 0;
  logic               cmd_valid = 0, cmd_ready, done;
  cmd_e               cmd = CMD_STORE;
  logic [1:0]         cmd_cluster = 0;
  logic [5:0]         cmd_sl = 0;
  phase_e             phase;
  logic               wr_en = 0;
  logic [2:0]         wr_sub = 0, rd_sub = 0;
  logic [7:0]         wr_row = 0, rd_row = 0;
  logic [COLS-1:0]    wr_data = '0, rd_data;
  logic signed [7:0]  act [NSUB][ROWS];
  logic signed [23:0] result [NSUB][NADC];
  logic               result_valid, in_sat, adc_sat;
  int checks = 0, failures = 0;

  tlnv_macro dut (.*);

  always #5 clk = ~clk;

  // mechanism counters
  int n_st1, n_st2, n_pre, n_lamp, n_ramp, n_cim, n_adc_sat, n_in_sat, n_stall, n_poff;
  int n_lrs, n_mrs, n_hrs;
  always @(posedge clk) begin
    if (phase == PH_ST1 && $past(phase) != PH_ST1) n_st1++;
    if (phase == PH_ST2 && $past(phase) != PH_ST2) n_st2++;
    if (phase == PH_RS_PRE && $past(phase) != PH_RS_PRE) n_pre++;
    if (phase == PH_RS_L_AMP && $past(phase) != PH_RS_L_AMP) n_lamp++;
    if (phase == PH_RS_R_AMP && $past(phase) != PH_RS_R_AMP) n_ramp++;
    if (phase == PH_CIM && $past(phase) != PH_CIM) n_cim++;
    if (adc_sat) n_adc_sat++;
    if (in_sat && phase == PH_CIM) n_in_sat++;
    if (cmd_valid && !cmd_ready) n_stall++;
    if (power_off) n_poff++;
  end

  int wa [NSUB][ROWS][NC];
  int wb [NSUB][ROWS][NC];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic int clip(int v);
    return (v > 121) ? 121 : (v < -121) ? -121 : v;
  endfunction

  function automatic int xtrit(int v, int t);
    int u;
    u = clip(v) + 121;
    repeat (t) u = u / 3;
    return (u % 3) - 1;
  endfunction

  task automatic write_all(ref int w [NSUB][ROWS][NC]);
    for (int s = 0; s < NSUB; s++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        wr_en = 1; wr_sub = 3'(s); wr_row = 8'(r);
        for (int c = 0; c < NC; c++) begin
          wr_data[2*c +: 2] = (w[s][r][c] == 1) ? 2'b00 : (w[s][r][c] == 0) ? 2'b01 : 2'b11;
          if (w[s][r][c] == 1) n_lrs++; else if (w[s][r][c] == 0) n_mrs++; else n_hrs++;
        end
      end
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic present(cmd_e c, int cl, int sl);
    @(negedge clk);
    cmd = c; cmd_cluster = 2'(cl); cmd_sl = 6'(sl); cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
  endtask

  task automatic wait_done();
    do @(posedge clk); while (!done);
  endtask

  task automatic check_sram(ref int w [NSUB][ROWS][NC], input string what);
    bit ok;
    ok = 1;
    for (int s = 0; s < NSUB; s++)
      for (int r = 0; r < ROWS; r++) begin
        rd_sub = 3'(s); rd_row = 8'(r);
        #1;
        for (int c = 0; c < NC; c++)
          if (q_to_trit({rd_data[2*c], rd_data[2*c+1]}) != 2'(w[s][r][c])) ok = 0;
      end
    check(ok, what);
  endtask

  task automatic run_cim(ref int w [NSUB][ROWS][NC], input string what);
    int lat;
    bit ok_model, ok_exact;
    longint p3 [5] = '{1, 3, 9, 27, 81};
    present(CMD_CIM, 0, 0);
    lat = 0;
    do begin @(posedge clk); lat++; #1; end while (!result_valid);
    check(lat == 5 * 16 * 5 + 1, $sformatf("%s latency %0d", what, lat));
    ok_model = 1; ok_exact = 1;
    for (int s = 0; s < NSUB; s++)
      for (int a = 0; a < NADC; a++) begin
        longint model, exact;
        bit clipped;
        model = 0; exact = 0; clipped = 0;
        for (int r = 0; r < ROWS; r++) begin
          longint wv;
          wv = 0;
          for (int k = 0; k < 5; k++) wv += p3[4-k] * w[s][r][5*a + k];
          exact += longint'(clip(int'(act[s][r]))) * wv;
        end
        for (int t = 0; t < 5; t++)
          for (int b = 0; b < 16; b++)
            for (int k = 0; k < 5; k++) begin
              int cnt;
              cnt = 0;
              for (int r = 16*b; r < 16*b + 16; r++)
                cnt += 1 - xtrit(int'(act[s][r]), t) * w[s][r][5*a + k];
              if (cnt > 31) begin cnt = 31; clipped = 1; end
              model += p3[t] * p3[4-k] * (16 - cnt);
            end
        if (longint'(result[s][a]) != model) begin
          ok_model = 0;
          $display("  sub %0d out %0d: got %0d model %0d", s, a, result[s][a], model);
        end
        if (!clipped && longint'(result[s][a]) != exact) ok_exact = 0;
      end
    check(ok_model, {what, ": results vs ADC model"});
    check(ok_exact, {what, ": results vs exact dot product"});
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < NSUB; s++)
      for (int r = 0; r < ROWS; r++) begin
        act[s][r] = 8'($urandom_range(0, 255));
        for (int c = 0; c < NC; c++) begin
          wa[s][r][c] = $urandom_range(0, 2) - 1;
          wb[s][r][c] = $urandom_range(0, 2) - 1;
        end
      end
    for (int r = 32; r < 48; r++) begin     // block 2 of subarray 0, output 3
      act[0][r] = -8'sd121;
      for (int c = 15; c < 20; c++) wa[0][r][c] = 1;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;

    write_all(wa);
    present(CMD_STORE, 1, 10);
    wait_done();
    write_all(wb);                     // the SRAM is written after the store finished
    present(CMD_STORE, 3, 59);
    present(CMD_RESTORE, 1, 10);       // presented while the store runs: stalls
    wait_done();
    check(n_stall > 0, "command waited while busy");
    check_sram(wa, "restore of set A right after storing B");

    @(negedge clk);
    power_off = 1;
    @(negedge clk);
    power_off = 0;
    rd_sub = 3'd2; rd_row = 8'd100;
    #1;
    check(rd_data == '0, "power-off clears SRAM");
    present(CMD_RESTORE, 1, 10);
    wait_done();
    check_sram(wa, "restore of set A after power-off");
    run_cim(wa, "CIM on set A");

    present(CMD_RESTORE, 3, 59);
    wait_done();
    check_sram(wb, "restore of set B");
    run_cim(wb, "CIM on set B");

    $display("mechanisms: store1=%0d store2=%0d precharge=%0d left=%0d right=%0d cim=%0d",
             n_st1, n_st2, n_pre, n_lamp, n_ramp, n_cim);
    $display("            adc_sat=%0d in_sat=%0d stall=%0d power_off=%0d LRS/MRS/HRS trits=%0d/%0d/%0d",
             n_adc_sat, n_in_sat, n_stall, n_poff, n_lrs, n_mrs, n_hrs);
    check(n_st1 >= 2 && n_st2 >= 2, "store phases");
    check(n_pre >= 3 && n_lamp >= 3 && n_ramp >= 3, "restore phases");
    check(n_cim == 2, "CIM operations");
    check(n_adc_sat > 0, "ADC saturation");
    check(n_in_sat > 0, "input clipping");
    check(n_poff > 0, "power-off");
    check(n_lrs > 0 && n_mrs > 0 && n_hrs > 0, "all three ReRAM states stored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
