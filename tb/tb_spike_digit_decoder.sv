// tb_spike_digit_decoder: all 256 (cipher, KEY) pairs. A pair that the published table
// assigns to a digit must decode to it; cipher 0 is digit 0 for any KEY; every other
// pair, including the three for which KEY alone would be ambiguous, must be valid only
// if it is in the table.
module tb_spike_digit_decoder;
  import steg_pkg::*;
  import tb_ref_pkg::*;

  nibble_t cipher, key, digit;
  logic    valid;
  int checks = 0, failures = 0;

  spike_digit_decoder dut (.cipher, .key, .digit, .valid);

  initial begin
    for (int c = 0; c < 16; c++)
      for (int k = 0; k < 16; k++) begin
        int ed;
        bit ev;
        cipher = nibble_t'(c);
        key    = nibble_t'(k);
        #1;
        ev = (c == 0);
        ed = 0;
        for (int d = 1; d < 10; d++)
          if (CIPHER[d] == c && KEY[d] == k) begin
            ev = 1;
            ed = d;
          end
        checks++;
        if (valid !== ev || (ev && int'(digit) != ed)) begin
          failures++;
          $display("FAIL (%0d,%0d) -> digit %0d valid %0b, expected %0d %0b", c, k, digit, valid,
                   ed, ev);
        end
      end
    // the paper's worked example: remainder 11 with KEY 0 is digit 1
    cipher = 4'd11;
    key    = 4'd0;
    #1;
    checks++;
    if (!valid || digit != 4'd1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
