// tb_ternary_encoder: exhaustive check of the 8-bit -> 5-trit encoder.
// For all 256 inputs: the trits must be balanced digits whose weighted sum is
// the input clipped to +-121, each drive must match the coding table written
// out literally here, and sat must flag exactly the clipped inputs. Also
// checks the worked example 67 -> +1 -1 +1 +1 +1.
module tb_ternary_encoder;
  import tlnv_pkg::*;

  logic signed [7:0] x;
  trit_t             trit [5];
  row_drive_t        drive [5];
  logic              sat;
  int checks = 0, failures = 0;

  ternary_encoder dut (.x, .trit, .drive, .sat);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s (x=%0d)", what, x);
    end
  endtask

  function automatic logic [3:0] table_drive(int t);  // {in1,in2,inb1,inb2}
    if (t == 1)  return 4'b1100;
    if (t == 0)  return 4'b1001;
    return 4'b0011;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -128; v < 128; v++) begin
      int sum, want, p;
      bit digits_ok, drive_ok;
      x = 8'(v);
      #1;
      want = (v > 121) ? 121 : (v < -121) ? -121 : v;
      sum = 0; p = 1; digits_ok = 1; drive_ok = 1;
      for (int k = 0; k < 5; k++) begin
        int t;
        t = int'(trit[k]);
        if (t < -1 || t > 1) digits_ok = 0;
        sum += t * p;
        p *= 3;
        if (drive[k] != table_drive(t)) drive_ok = 0;
      end
      check(digits_ok, "digit range");
      check(sum == want, "value");
      check(drive_ok, "drive coding");
      check(sat == (v != want), "sat flag");
    end
    x = 8'sd67;
    #1;
    check(trit[4] == 1 && trit[3] == -1 && trit[2] == 1 && trit[1] == 1 && trit[0] == 1,
          "example 67");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
