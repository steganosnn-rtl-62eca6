// tb_sample_reassembler: every 16-bit sample split by the reference model must be rebuilt
// exactly; out-of-range magnitudes and digits above 9 must raise range_err.
module tb_sample_reassembler;
  import steg_pkg::*;
  import tb_ref_pkg::*;

  logic        sign;
  nibble_t     digits [5];
  logic [15:0] sample;
  logic        range_err;
  int checks = 0, failures = 0;

  sample_reassembler dut (.sign, .digits, .sample, .range_err);

  task automatic apply(input int sg, input int d4, d3, d2, d1, d0);
    sign      = 1'(sg);
    digits[4] = 4'(d4);
    digits[3] = 4'(d3);
    digits[2] = 4'(d2);
    digits[1] = 4'(d1);
    digits[0] = 4'(d0);
    #1;
  endtask

  initial begin
    for (int s = -32768; s <= 32767; s += 1) begin
      int sym [6];
      symbols(s, sym);
      apply(sym[0], sym[1], sym[2], sym[3], sym[4], sym[5]);
      checks++;
      if ($signed(sample) != s || range_err) begin
        failures++;
        if (failures < 10) $display("FAIL %0d -> %0d err %0b", s, $signed(sample), range_err);
      end
    end
    apply(0, 3, 2, 7, 6, 8);  // +32768
    checks++;
    if (!range_err) failures++;
    apply(1, 3, 2, 7, 6, 9);  // -32769
    checks++;
    if (!range_err) failures++;
    apply(0, 9, 9, 9, 9, 9);
    checks++;
    if (!range_err) failures++;
    apply(0, 0, 0, 0, 12, 0);  // digit out of range
    checks++;
    if (!range_err) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
