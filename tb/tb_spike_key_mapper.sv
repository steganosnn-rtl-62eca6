// tb_spike_key_mapper: every digit 0..9 must map to the published (cipher, KEY) pair;
// codes 10..15 must give (0, 0).
module tb_spike_key_mapper;
  import steg_pkg::*;
  import tb_ref_pkg::*;

  nibble_t digit, cipher, key;
  int checks = 0, failures = 0;

  spike_key_mapper dut (.digit(digit), .cipher(cipher), .key(key));

  initial begin
    for (int d = 0; d < 16; d++) begin
      int ec, ek;
      digit = nibble_t'(d);
      #1;
      ec = (d < 10) ? CIPHER[d] : 0;
      ek = (d < 10) ? KEY[d] : 0;
      checks += 2;
      if (int'(cipher) != ec) begin
        failures++;
        $display("FAIL digit %0d cipher %0d expected %0d", d, cipher, ec);
      end
      if (int'(key) != ek) begin
        failures++;
        $display("FAIL digit %0d key %0d expected %0d", d, key, ek);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
