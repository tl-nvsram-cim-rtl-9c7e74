// mux_adc: behavioural model of the 5:1 analog MUX and 5-bit ADC that read
// the compute bitlines (CBLs).
//
// This is a behavioural model: the real block samples the CBL voltage after
// the fixed discharge time and digitises the drop with a 5-bit flash ADC.
// Here the CBL arrives as its discharge count (units of one cell current, see
// tlnv_array), the MUX picks one of NMUX CBLs and the ADC returns the count
// clipped to 2^ADC_BITS - 1. With 16 active rows the count spans 0..32, one
// level more than 5 bits hold, so the extreme count 32 (all 16 products = -1)
// reads as 31; sat flags that case. The paper gives the sharing (one ADC per
// five CBLs) and the 5-bit resolution; the clipping rule is this design's.
//
// Timing: one conversion per clock. code, sat and code_valid are registered:
// they describe the CBL selected by sel in the clock in which sample was high.
module mux_adc #(
  parameter int NMUX     = 5,
  parameter int CNT_W    = 10,
  parameter int ADC_BITS = 5,
  parameter int MX_W     = (NMUX > 1) ? $clog2(NMUX) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [CNT_W-1:0]    cbl [NMUX],
  input  logic [MX_W-1:0]     sel,
  input  logic                sample,
  output logic [ADC_BITS-1:0] code,
  output logic                code_valid,
  output logic                sat
);
  localparam int FULL = 2**ADC_BITS - 1;

  logic [CNT_W-1:0] vin;
  assign vin = cbl[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code       <= '0;
      code_valid <= 1'b0;
      sat        <= 1'b0;
    end else begin
      code_valid <= sample;
      if (sample) begin
        if (int'(vin) > FULL) begin
          code <= ADC_BITS'(FULL);
          sat  <= 1'b1;
        end else begin
          code <= vin[ADC_BITS-1:0];
          sat  <= 1'b0;
        end
      end
    end
  end
endmodule
