// tb_digit_extractor: converts the extreme, zero and the paper's example sample and
// 500 random samples; checks sign and digits against integer division and that done
// arrives exactly 16 cycles after start.
module tb_digit_extractor;
  import steg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] sample = '0;
  logic busy, done, sign;
  nibble_t digits [5];
  int checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  digit_extractor dut (.clk, .rst_n, .start, .sample, .busy, .done, .sign, .digits);

  task automatic convert(input int s);
    int sym [6];
    int lat;
    @(negedge clk);
    sample = 16'(s);
    start  = 1;
    @(negedge clk);
    start = 0;
    lat   = 0;  // cycles since the clock edge that took start
    while (!done && lat < 100) begin
      @(negedge clk);
      lat++;
    end
    symbols(s, sym);
    checks += 7;
    if (lat != 16) begin
      failures++;
      $display("FAIL latency %0d for %0d", lat, s);
    end
    if (int'(sign) != sym[0]) begin
      failures++;
      $display("FAIL sign for %0d", s);
    end
    for (int i = 0; i < 5; i++)
      if (int'(digits[4-i]) != sym[i+1]) begin
        failures++;
        $display("FAIL sample %0d digit %0d = %0d expected %0d", s, 4-i, digits[4-i], sym[i+1]);
      end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    convert(12345);
    convert(-32768);
    convert(32767);
    convert(0);
    convert(-1);
    convert(-9999);
    for (int i = 0; i < 500; i++) convert(int'($signed(16'($urandom))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 50000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
