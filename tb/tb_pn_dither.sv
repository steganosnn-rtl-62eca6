// tb_pn_dither: steps the offset generator at random and compares with a modulo-3
// counter (range 0..2), and with a modulo-4 counter for DITHER_MAX = 3.
module tb_pn_dither;
  logic clk = 0, rst_n = 0, step = 0;
  logic [1:0] off2, off3;
  int checks = 0, failures = 0, cycles = 0;
  int m2 = 0, m3 = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  pn_dither #(.DITHER_MAX(2)) dut2 (.clk, .rst_n, .step, .offset(off2));
  pn_dither #(.DITHER_MAX(3)) dut3 (.clk, .rst_n, .step, .offset(off3));

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      checks += 2;
      if (int'(off2) != m2) begin
        failures++;
        $display("FAIL cycle %0d offset %0d expected %0d", i, off2, m2);
      end
      if (int'(off3) != m3) failures++;
      step = ($urandom_range(0, 3) != 0);
      if (step) begin
        m2 = (m2 + 1) % 3;
        m3 = (m3 + 1) % 4;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 10000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
