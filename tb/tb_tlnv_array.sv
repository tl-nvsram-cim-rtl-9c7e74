// tb_tlnv_array: the cell-array model at full size (256 x 320, 4 x 60 ReRAMs
// per cell), driven directly with the line levels of the signal-settings
// table. Checks:
//  * store then restore returns every trit (all three ReRAM states occur),
//  * a second store to another ReRAM does not disturb the first,
//  * power-off clears the SRAM, restore brings the weights back,
//  * CIM: each CBL count equals sum over active rows of (1 - x*w), worked out
//    here from the trits written, for random inputs on random rows.
module tb_tlnv_array;
  import tlnv_pkg::*;

  localparam int ROWS = 256, COLS = 320, M = 4, N = 60, NC = COLS / 2;

  logic             clk = 0, power_off = 0;
  level_e           sel_lv [M];
  level_e           sl_lv  [N];
  array_lines_t     lines;
  row_drive_t       row_drv [ROWS];
  logic             wr_en = 0;
  logic [7:0]       wr_row = 0, rd_row = 0;
  logic [COLS-1:0]  wr_data = '0, rd_data;
  logic [9:0]       cbl_cnt [NC];
  int checks = 0, failures = 0;

  tlnv_array #(.ROWS(ROWS), .COLS(COLS), .M(M), .N(N)) dut (.*);

  always #5 clk = ~clk;

  int w1 [ROWS][NC];
  int w2 [ROWS][NC];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic logic [1:0] qcode(int t);   // {Q2,Q1} as stored in bits 2c+1:2c
    return (t == 1) ? 2'b00 : (t == 0) ? 2'b01 : 2'b11;
  endfunction

  task automatic idle_lines();
    for (int i = 0; i < M; i++) sel_lv[i] = LV_GND;
    for (int j = 0; j < N; j++) sl_lv[j] = LV_VDDL;
    lines = '{rstr1: LV_GND, rstr2: LV_GND, str1: LV_GND, str2: LV_GND, cbl: LV_VDD,
              rst: LV_GND, vr1: LV_GND, vr2: LV_GND, ctrl1: 1'b1, ctrl2: 1'b1, wl_pre: 1'b0, cim: 1'b0};
    for (int r = 0; r < ROWS; r++) row_drv[r] = '0;
  endtask

  task automatic write_all(ref int w [ROWS][NC]);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 8'(r);
      for (int c = 0; c < NC; c++) wr_data[2*c +: 2] = qcode(w[r][c]);
    end
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic store(int i, int j);
    @(negedge clk);
    idle_lines();
    sel_lv[i] = LV_VDDH; sl_lv[j] = LV_GND; lines.cbl = LV_VDDH; lines.rst = LV_VDDH;
    repeat (2) @(negedge clk);
    idle_lines();
    sel_lv[i] = LV_VDDH; sl_lv[j] = LV_VDDH; lines.str1 = LV_VDD; lines.str2 = LV_VSTR;
    lines.cbl = LV_FLOAT;
    repeat (2) @(negedge clk);
    idle_lines();
  endtask

  task automatic restore(int i, int j);
    @(negedge clk);
    idle_lines();
    lines.ctrl1 = 0; lines.ctrl2 = 0; lines.wl_pre = 1; lines.cbl = LV_FLOAT;
    repeat (2) @(negedge clk);
    lines.wl_pre = 0;
    sel_lv[i] = LV_VDD; sl_lv[j] = LV_GND; lines.rstr1 = LV_VDD; lines.vr1 = LV_VDD;
    repeat (2) @(negedge clk);
    lines.ctrl1 = 1;
    @(negedge clk);
    lines.rstr2 = LV_VDD; lines.vr2 = LV_VDD;
    repeat (2) @(negedge clk);
    lines.ctrl2 = 1;
    @(negedge clk);
    idle_lines();
  endtask

  task automatic check_sram(ref int w [ROWS][NC], input string what);
    bit ok;
    ok = 1;
    for (int r = 0; r < ROWS; r++) begin
      rd_row = 8'(r);
      #1;
      for (int c = 0; c < NC; c++) if (rd_data[2*c +: 2] != qcode(w[r][c])) ok = 0;
    end
    check(ok, what);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nst [3];
    idle_lines();
    nst = '{0, 0, 0};
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < NC; c++) begin
        w1[r][c] = $urandom_range(0, 2) - 1;
        w2[r][c] = $urandom_range(0, 2) - 1;
        nst[w1[r][c] + 1]++;
      end
    check(nst[0] > 0 && nst[1] > 0 && nst[2] > 0, "all three states stored");
    write_all(w1);
    check_sram(w1, "write port");
    store(1, 5);
    write_all(w2);
    store(3, 59);
    @(negedge clk);
    power_off = 1;
    @(negedge clk);
    power_off = 0;
    rd_row = 8'd77;
    #1;
    check(rd_data == '0, "power-off clears SRAM");
    restore(1, 5);
    check_sram(w1, "restore of ReRAM (1,5)");
    restore(3, 59);
    check_sram(w2, "restore of ReRAM (3,59)");
    restore(1, 5);
    check_sram(w1, "restore of ReRAM (1,5) again");
    // CIM with w1 in the SRAM
    for (int rep = 0; rep < 20; rep++) begin
      int x [ROWS];
      int base, nact;
      bit ok;
      @(negedge clk);
      idle_lines();
      lines.rst = LV_VDD; lines.cim = 1;
      base = $urandom_range(0, 15) * 16;
      nact = (rep < 10) ? 16 : ROWS;
      for (int r = 0; r < ROWS; r++) begin
        x[r] = 2;   // idle row
        if ((nact == ROWS) || (r >= base && r < base + 16)) begin
          x[r] = $urandom_range(0, 2) - 1;
          row_drv[r] = (x[r] == 1) ? 4'b1100 : (x[r] == 0) ? 4'b1001 : 4'b0011;
        end
      end
      #1;
      ok = 1;
      for (int c = 0; c < NC; c++) begin
        int want;
        want = 0;
        for (int r = 0; r < ROWS; r++) if (x[r] != 2) want += 1 - x[r] * w1[r][c];
        if (int'(cbl_cnt[c]) != want) ok = 0;
      end
      check(ok, $sformatf("CIM counts rep %0d", rep));
    end
    @(negedge clk);
    idle_lines();
    #1;
    begin
      bit z;
      z = 1;
      for (int c = 0; c < NC; c++) if (cbl_cnt[c] != 0) z = 0;
      check(z, "no discharge outside CIM mode");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
