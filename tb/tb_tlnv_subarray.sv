// tb_tlnv_subarray: one full-size subarray (256 x 320, 4 x 60 ReRAMs per
// cell) through the command interface:
//  write weights A -> STORE (0,7) -> write weights B -> STORE (2,33) ->
//  CIM on B -> power-off -> RESTORE (0,7) -> read back A -> CIM on A.
// Weights A put -1 in the 16 x 5 cells of output 0, block 0, and the matching
// activations are +121, so that CBL count 32 saturates the 5-bit ADC.
// Expected CIM results are computed here two ways: the exact dot product
// sum_r X_r * W_r (5-trit values), and a model that replays the ADC clipping
// per (input trit, block, weight trit); results must equal the latter, and
// the former wherever nothing clipped. Checks the CIM latency of
// 5 x 16 x 5 + 1 clocks from command acceptance to result_valid.
module tb_tlnv_subarray;
  import tlnv_pkg::*;

  localparam int ROWS = 256, COLS = 320, NC = COLS / 2, NADC = NC / 5;

  logic               clk = 0, rst_n = 0, power_off = 0;
  logic               cmd_valid = 0, cmd_ready, done;
  cmd_e               cmd = CMD_STORE;
  logic [1:0]         cmd_cluster = 0;
  logic [5:0]         cmd_sl = 0;
  phase_e             phase;
  logic               wr_en = 0;
  logic [7:0]         wr_row = 0, rd_row = 0;
  logic [COLS-1:0]    wr_data = '0, rd_data;
  logic signed [7:0]  act [ROWS];
  logic signed [23:0] result [NADC];
  logic               result_valid, in_sat, adc_sat;
  int checks = 0, failures = 0, n_adc_sat = 0, n_in_sat = 0;

  tlnv_subarray dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (adc_sat) n_adc_sat++;
    if (in_sat && phase == PH_CIM) n_in_sat++;
  end

  int wa [ROWS][NC];
  int wb [ROWS][NC];

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

  function automatic int xtrit(int v, int t);   // trit t (0 = LST) of clip(v)
    int u;
    u = clip(v) + 121;
    repeat (t) u = u / 3;
    return (u % 3) - 1;
  endfunction

  task automatic write_all(ref int w [ROWS][NC]);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 8'(r);
      for (int c = 0; c < NC; c++)
        wr_data[2*c +: 2] = (w[r][c] == 1) ? 2'b00 : (w[r][c] == 0) ? 2'b01 : 2'b11;
    end
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic command(cmd_e c, int cl, int sl, output int lat);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_cluster = 2'(cl); cmd_sl = 6'(sl); cmd_valid = 1;
    @(posedge clk);
    lat = 0;
    #1 cmd_valid = 0;
    if (c == CMD_CIM) begin
      do begin @(posedge clk); lat++; #1; end while (!result_valid);
    end else begin
      do begin @(posedge clk); lat++; #1; end while (!done);
    end
  endtask

  task automatic run_cim(ref int w [ROWS][NC], input string what);
    int lat;
    bit ok_model, ok_exact;
    longint p3 [5] = '{1, 3, 9, 27, 81};
    command(CMD_CIM, 0, 0, lat);
    check(lat == 5 * 16 * 5 + 1, $sformatf("%s latency %0d", what, lat));
    ok_model = 1; ok_exact = 1;
    for (int a = 0; a < NADC; a++) begin
      longint model, exact;
      bit clipped;
      model = 0; exact = 0; clipped = 0;
      for (int r = 0; r < ROWS; r++) begin
        longint wv;
        wv = 0;
        for (int k = 0; k < 5; k++) wv += p3[4-k] * w[r][5*a + k];
        exact += longint'(clip(int'(act[r]))) * wv;
      end
      for (int t = 0; t < 5; t++)
        for (int b = 0; b < 16; b++)
          for (int k = 0; k < 5; k++) begin
            int cnt;
            cnt = 0;
            for (int r = 16*b; r < 16*b + 16; r++)
              cnt += 1 - xtrit(int'(act[r]), t) * w[r][5*a + k];
            if (cnt > 31) begin cnt = 31; clipped = 1; end
            model += p3[t] * p3[4-k] * (16 - cnt);
          end
      if (longint'(result[a]) != model) ok_model = 0;
      if (!clipped && longint'(result[a]) != exact) ok_exact = 0;
    end
    check(ok_model, {what, " results vs ADC model"});
    check(ok_exact, {what, " results vs exact dot product"});
  endtask

  task automatic check_sram(ref int w [ROWS][NC], input string what);
    bit ok;
    ok = 1;
    for (int r = 0; r < ROWS; r++) begin
      rd_row = 8'(r);
      #1;
      for (int c = 0; c < NC; c++)
        if (q_to_trit({rd_data[2*c], rd_data[2*c+1]}) != 2'(w[r][c])) ok = 0;
    end
    check(ok, what);
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    for (int r = 0; r < ROWS; r++) begin
      act[r] = 8'($urandom_range(0, 255));
      for (int c = 0; c < NC; c++) begin
        wa[r][c] = $urandom_range(0, 2) - 1;
        wb[r][c] = $urandom_range(0, 2) - 1;
      end
    end
    for (int r = 0; r < 16; r++) begin
      act[r] = 8'sd121;
      for (int c = 0; c < 5; c++) wa[r][c] = -1;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    write_all(wa);
    command(CMD_STORE, 0, 7, lat);
    check(lat == 4, $sformatf("store latency %0d", lat));
    write_all(wb);
    command(CMD_STORE, 2, 33, lat);
    run_cim(wb, "CIM on B");
    @(negedge clk);
    power_off = 1;
    @(negedge clk);
    power_off = 0;
    command(CMD_RESTORE, 0, 7, lat);
    check(lat == 8, $sformatf("restore latency %0d", lat));
    check_sram(wa, "restore of A");
    run_cim(wa, "CIM on A");
    check(n_adc_sat > 0, "ADC saturation seen");
    check(n_in_sat > 0, "input clipping seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
