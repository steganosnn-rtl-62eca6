// sample_reassembler: rebuilds a signed 16-bit audio sample from sign and digits.
//
// magnitude = d4*10000 + d3*1000 + d2*100 + d1*10 + d0, and the sample is the
// magnitude negated when sign is 1. range_err flags a magnitude that no 16-bit sample
// has (above 32767 for a positive sign, above 32768 for a negative one) or a digit
// above 9. The paper only says that the sample is reconstructed once the sign and the
// digits are known; the constant-multiply adder tree is this design's choice.
//
// Interface: combinational. digits[4] is the ten-thousands digit.
module sample_reassembler
  import steg_pkg::*;
#(
  parameter int SAMPLE_W = 16,
  parameter int N_DIGITS = N_MAG_DIGITS
) (
  input  logic                sign,
  input  nibble_t             digits [N_DIGITS],
  output logic [SAMPLE_W-1:0] sample,
  output logic                range_err
);

  localparam int MAG_W = SAMPLE_W + 2;
  localparam logic [MAG_W-1:0] MAX_POS = MAG_W'((1 << (SAMPLE_W - 1)) - 1);

  logic [MAG_W-1:0] mag;
  logic             bad_digit;

  always_comb begin
    logic [MAG_W-1:0] w;
    mag       = '0;
    w         = MAG_W'(1);
    bad_digit = 1'b0;
    for (int i = 0; i < N_DIGITS; i++) begin
      mag = mag + MAG_W'(digits[i]) * w;
      w   = w * MAG_W'(10);
      if (digits[i] > 4'd9) bad_digit = 1'b1;
    end
    range_err = bad_digit || (sign ? (mag > MAX_POS + 1'b1) : (mag > MAX_POS));
    sample    = sign ? SAMPLE_W'(-mag) : SAMPLE_W'(mag);
  end

endmodule
