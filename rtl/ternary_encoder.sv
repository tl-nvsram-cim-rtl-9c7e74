// ternary_encoder: 8-bit binary activation -> 5 balanced-ternary trits.
//
// The macro computes with ternary inputs (each trit -1, 0 or +1), so every
// activation that leaves the binary activation buffer is re-coded on the fly.
// Five balanced trits span -121..+121. The activation is read as a signed
// two's-complement byte and clipped to that range first (the paper keeps 8-bit
// quantisation and truncates to 5 trits; the clipping rule and the signed
// reading are this design's choice). The conversion is the textbook digit
// recurrence: take v mod 3, map remainder 2 to trit -1 with a carry, divide by 3.
// Example (printed in the paper): 67 = 0100_0011b -> +1 -1 +1 +1 +1 (MST..LST).
//
// Each trit is also given as the four row signals of the coding table:
// +1 -> IN1/IN2 = 1/1, 0 -> 1/0, -1 -> 0/0, INB1/INB2 their complements.
//
// Interface: purely combinational. trit[0] is the least significant trit.
// sat is high when the input had to be clipped.
module ternary_encoder
  import tlnv_pkg::*;
#(
  parameter int W = IN_BITS,   // input width
  parameter int T = TRITS      // trits produced
) (
  input  logic signed [W-1:0] x,
  output trit_t               trit [T],
  output row_drive_t          drive [T],
  output logic                sat
);
  localparam int MAXV = (3**T - 1) / 2;

  always_comb begin
    int v, r;
    v   = int'(x);
    sat = 1'b0;
    if (v > MAXV) begin
      v   = MAXV;
      sat = 1'b1;
    end else if (v < -MAXV) begin
      v   = -MAXV;
      sat = 1'b1;
    end
    for (int k = 0; k < T; k++) begin
      r = v % 3;
      if (r < 0) r += 3;
      if (r == 2) begin
        trit[k] = -2'sd1;
        v       = (v + 1) / 3;
      end else if (r == 1) begin
        trit[k] = 2'sd1;
        v       = (v - 1) / 3;
      end else begin
        trit[k] = 2'sd0;
        v       = v / 3;
      end
      drive[k] = trit_to_drive(trit[k]);
    end
  end
endmodule
