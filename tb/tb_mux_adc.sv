// tb_mux_adc: random CBL counts (0..40) on five inputs, random MUX select;
// one clock later the code must be the selected count clipped to 31, sat
// must flag clipping and code_valid must follow sample.
module tb_mux_adc;
  logic       clk = 0, rst_n = 0;
  logic [9:0] cbl [5];
  logic [2:0] sel;
  logic       sample;
  logic [4:0] code;
  logic       code_valid, sat;
  int checks = 0, failures = 0, nsat = 0;

  mux_adc #(.NMUX(5), .CNT_W(10), .ADC_BITS(5)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sample = 0; sel = 0;
    for (int k = 0; k < 5; k++) cbl[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      int v;
      bit s;
      @(negedge clk);
      for (int k = 0; k < 5; k++) cbl[k] = 10'($urandom_range(0, 40));
      sel    = 3'($urandom_range(0, 4));
      s      = ($urandom_range(0, 3) != 0);
      sample = s;
      v      = int'(cbl[sel]);
      @(negedge clk);
      checks++;
      if (code_valid != s) begin failures++; $display("FAIL valid"); end
      if (s) begin
        checks += 2;
        if (int'(code) != ((v > 31) ? 31 : v)) begin
          failures++; $display("FAIL code %0d for count %0d", code, v);
        end
        if (sat != (v > 31)) begin failures++; $display("FAIL sat"); end
        if (v > 31) nsat++;
      end
      sample = 0;
    end
    checks++;
    if (nsat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
