// tb_input_driver: random activations; for every compute block and input
// trit, the 16 rows of the block must carry the coded trit of their own
// activation and every other row must be idle. The reference trits come from
// an unbalanced base-3 expansion of (v + 121), digit - 1, independent of the
// encoder's recurrence.
module tb_input_driver;
  import tlnv_pkg::*;

  localparam int ROWS = 256, ACT = 16, NCB = ROWS / ACT;

  logic signed [7:0] act [ROWS];
  logic              en;
  logic [3:0]        cb_sel;
  logic [2:0]        trit_sel;
  row_drive_t        row_drv [ROWS];
  logic              sat;
  int checks = 0, failures = 0;

  input_driver #(.ROWS(ROWS), .ACT_ROWS(ACT)) dut (.*);

  function automatic int ref_trit(int v, int k);
    int u;
    if (v > 121) v = 121;
    if (v < -121) v = -121;
    u = v + 121;
    for (int i = 0; i < k; i++) u = u / 3;
    return (u % 3) - 1;
  endfunction

  function automatic logic [3:0] code(int t);
    return (t == 1) ? 4'b1100 : (t == 0) ? 4'b1001 : 4'b0011;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) act[r] = 8'($urandom_range(0, 255));
    act[17] = 8'sd127;   // one clipped activation in block 1
    for (int pass = 0; pass < 2; pass++) begin
      en = (pass == 1);
      for (int b = 0; b < NCB; b++)
        for (int t = 0; t < 5; t++) begin
          bit ok, bsat;
          cb_sel = 4'(b); trit_sel = 3'(t);
          #1;
          ok = 1; bsat = 0;
          for (int r = 0; r < ROWS; r++) begin
            logic [3:0] want;
            want = (en && r / ACT == b) ? code(ref_trit(int'(act[r]), t)) : 4'b0000;
            if (row_drv[r] != want) ok = 0;
            if (en && r / ACT == b && (act[r] > 121 || act[r] < -121)) bsat = 1;
          end
          checks++;
          if (!ok) begin
            failures++;
            $display("FAIL drive en=%0d cb=%0d trit=%0d", en, b, t);
          end
          checks++;
          if (sat != bsat) begin
            failures++;
            $display("FAIL sat en=%0d cb=%0d", en, b);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
