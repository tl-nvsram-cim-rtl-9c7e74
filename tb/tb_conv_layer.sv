// tb_conv_layer: a first convolution layer of a CIFAR-10 network (ResNet-18
// and VGG-9 both start with 3 -> 64 channels, 3 x 3 kernels, stride 1,
// padding 1) run on the full-size macro.
//
// Mapping, as the weight-mapping scheme prescribes: the layer becomes a
// (C*k*k) x (M*5*2) = 27 x 640 matrix of trit pairs. Output channels 0..31
// go to subarray 0 and 32..63 to subarray 1 (five CBLs, one 5-trit weight,
// per channel); rows 27..255 and the other subarrays hold weight 0. The
// weights are written, stored to ReRAM (2,17), the power is cycled, they are
// restored, and then one CIM operation per output pixel computes all 64
// channels of that pixel. Every channel is compared with a direct convolution
// of the clipped 8-bit image.
module tb_conv_layer;
  import tlnv_pkg::*;

  localparam int NSUB = 6, ROWS = 256, COLS = 320, NC = COLS / 2, NADC = NC / 5;
  localparam int CIN = 3, K = 3, COUT = 64, H = 8, WD = 8;

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

  int wgt [COUT][CIN][K][K];     // 5-trit weights, -121..121
  int img [CIN][H][WD];          // signed 8-bit pixels

  function automatic int clip(int v);
    return (v > 121) ? 121 : (v < -121) ? -121 : v;
  endfunction

  function automatic int wtrit(int v, int k);   // trit k (0 = MST) of a weight
    int u;
    u = v + 121;
    repeat (4 - k) u = u / 3;
    return (u % 3) - 1;
  endfunction

  task automatic present(cmd_e c, int cl, int sl);
    @(negedge clk);
    cmd = c; cmd_cluster = 2'(cl); cmd_sl = 6'(sl); cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
  endtask

  task automatic wait_done();
    do @(posedge clk); while (!done);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int py [4] = '{0, 3, 7, 5};
    int px [4] = '{0, 4, 7, 2};
    for (int o = 0; o < COUT; o++)
      for (int c = 0; c < CIN; c++)
        for (int y = 0; y < K; y++)
          for (int x = 0; x < K; x++) wgt[o][c][y][x] = $urandom_range(0, 242) - 121;
    for (int c = 0; c < CIN; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < WD; x++) img[c][y][x] = $urandom_range(0, 255) - 128;
    for (int s = 0; s < NSUB; s++)
      for (int r = 0; r < ROWS; r++) act[s][r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // write the 27 x 640 weight matrix (zero weights elsewhere)
    for (int s = 0; s < NSUB; s++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        wr_en = 1; wr_sub = 3'(s); wr_row = 8'(r);
        for (int cl = 0; cl < NC; cl++) begin
          int o, t;
          o = s * NADC + cl / 5;
          t = 0;
          if (s < 2 && r < CIN * K * K)
            t = wtrit(wgt[o][r / 9][(r % 9) / 3][r % 3], cl % 5);
          wr_data[2*cl +: 2] = {t == -1, t != 1};   // {Q2, Q1}
        end
      end
    @(negedge clk);
    wr_en = 0;
    present(CMD_STORE, 2, 17);
    wait_done();
    @(negedge clk);
    power_off = 1;
    @(negedge clk);
    power_off = 0;
    present(CMD_RESTORE, 2, 17);
    wait_done();

    for (int p = 0; p < 4; p++) begin
      bit ok;
      for (int r = 0; r < CIN * K * K; r++) begin
        int c, y, x, v;
        c = r / 9; y = py[p] + (r % 9) / 3 - 1; x = px[p] + r % 3 - 1;
        v = (y < 0 || y >= H || x < 0 || x >= WD) ? 0 : img[c][y][x];
        act[0][r] = 8'(v);
        act[1][r] = 8'(v);
      end
      present(CMD_CIM, 0, 0);
      do @(posedge clk); while (!result_valid);
      #1;
      ok = 1;
      for (int o = 0; o < COUT; o++) begin
        int want;
        want = 0;
        for (int c = 0; c < CIN; c++)
          for (int y = 0; y < K; y++)
            for (int x = 0; x < K; x++) begin
              int iy, ix;
              iy = py[p] + y - 1; ix = px[p] + x - 1;
              if (iy >= 0 && iy < H && ix >= 0 && ix < WD)
                want += clip(img[c][iy][ix]) * wgt[o][c][y][x];
            end
        if (int'(result[o / NADC][o % NADC]) != want) begin
          ok = 0;
          $display("  pixel %0d channel %0d: got %0d want %0d", p, o, result[o / NADC][o % NADC], want);
        end
      end
      checks++;
      if (!ok) begin
        failures++;
        $display("FAIL pixel (%0d,%0d)", py[p], px[p]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
