// shift_adder: shift & adder behind one ADC.
//
// One ADC serves the five CBLs that hold the five trits of one weight column
// (most significant trit first). Each ADC code is first turned into the signed
// partial MAC of the ACT_ROWS active rows: mac = ACT_ROWS - code, because each
// row discharges 1 - x*w cell currents. The partial MACs are then combined
// with powers of three, the ternary "shift" being x3 = (x << 1) + x:
//   * over the five weight trits (Horner: wsum = 3*wsum + mac),
//   * summed over the compute blocks of one input trit,
//   * over the five input trits, most significant first (acc = 3*acc + ...).
// After the last sample the result is sum_r x_r * W_r over all ROWS rows,
// with x_r and W_r the 5-trit values of activation and weight.
// The paper names the block and its place in the datapath; the tag-driven
// Horner scheme is this design's way of doing it.
//
// Interface: code/code_valid come from the ADC, the tags are aligned with
// them (k_first/k_last: first/last CBL of the weight, cb_first: first CB of an
// input trit, trit_first: first input trit, last: final sample). result is
// registered and result_valid pulses for one clock one cycle after the final
// sample's code.
module shift_adder #(
  parameter int ACT_ROWS = 16,
  parameter int ADC_BITS = 5,
  parameter int ACC_W    = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [ADC_BITS-1:0]     code,
  input  logic                    code_valid,
  input  logic                    k_first,
  input  logic                    k_last,
  input  logic                    cb_first,
  input  logic                    trit_first,
  input  logic                    last,
  output logic signed [ACC_W-1:0] result,
  output logic                    result_valid
);
  logic signed [ACC_W-1:0] wsum, acc;
  logic signed [ACC_W-1:0] mac, wsum_n, acc_n;

  function automatic logic signed [ACC_W-1:0] times3(logic signed [ACC_W-1:0] v);
    return (v <<< 1) + v;
  endfunction

  always_comb begin
    mac    = ACC_W'(ACT_ROWS) - ACC_W'(code);
    wsum_n = k_first ? mac : times3(wsum) + mac;
    if (cb_first && trit_first) acc_n = wsum_n;
    else if (cb_first)          acc_n = times3(acc) + wsum_n;
    else                        acc_n = acc + wsum_n;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wsum         <= '0;
      acc          <= '0;
      result       <= '0;
      result_valid <= 1'b0;
    end else begin
      result_valid <= 1'b0;
      if (code_valid) begin
        wsum <= wsum_n;
        if (k_last) acc <= acc_n;
        if (last) begin
          result       <= acc_n;
          result_valid <= 1'b1;
        end
      end
    end
  end
endmodule
