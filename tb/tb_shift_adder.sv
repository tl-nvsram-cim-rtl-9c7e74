// tb_shift_adder: feeds full CIM schedules (5 input trits x 16 blocks x 5
// weight trits) of random ADC codes with the controller's tags and compares
// the result with the direct sum over i, b, k of 3^(4-i) * 3^(4-k) *
// (16 - code). Checks that result_valid comes exactly one clock after the
// last code and only then.
module tb_shift_adder;
  localparam int NCB = 16;

  logic        clk = 0, rst_n = 0;
  logic [4:0]  code;
  logic        code_valid, k_first, k_last, cb_first, trit_first, last;
  logic signed [23:0] result;
  logic        result_valid;
  int checks = 0, failures = 0;

  shift_adder #(.ACT_ROWS(16), .ADC_BITS(5), .ACC_W(24)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    code_valid = 0; {k_first, k_last, cb_first, trit_first, last} = '0; code = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      longint expect_v;
      int p3 [5] = '{81, 27, 9, 3, 1};
      expect_v = 0;
      for (int i = 0; i < 5; i++)
        for (int b = 0; b < NCB; b++)
          for (int k = 0; k < 5; k++) begin
            int c;
            c = (run == 0) ? 31 : (run == 1) ? 0 : $urandom_range(0, 31);
            @(negedge clk);
            code = 5'(c);
            code_valid = 1;
            k_first = (k == 0); k_last = (k == 4); cb_first = (b == 0);
            trit_first = (i == 0); last = (i == 4 && b == NCB - 1 && k == 4);
            expect_v += longint'(p3[i]) * p3[k] * (16 - c);
            @(posedge clk);
            #1;
            checks++;
            if (result_valid != (i == 4 && b == NCB - 1 && k == 4)) begin
              failures++; $display("FAIL result_valid timing run %0d", run);
            end
          end
      @(negedge clk);
      code_valid = 0; last = 0;
      checks++;
      if (longint'(result) != expect_v) begin
        failures++; $display("FAIL run %0d result %0d expected %0d", run, result, expect_v);
      end
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
