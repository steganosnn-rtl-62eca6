// tb_spike_pattern_rom: reads every address and checks the spike train and chosen
// timestamp against the published per-digit spike lists, that the chosen timestamps give
// ten distinct remainders modulo 16 that are non-zero except for digit 0, and that
// addresses 10..15 read as zero.
module tb_spike_pattern_rom;
  import steg_pkg::*;

  nibble_t      digit;
  spike_train_t pattern;
  tstamp_t      ts;
  spike_train_t patterns  [N_DIG];
  tstamp_t      chosen_ts [N_DIG];
  int checks = 0, failures = 0;

  spike_pattern_rom dut (.digit(digit), .pattern(pattern), .chosen_ts(ts));

  int lists [10][$];
  int chosen [10] = '{0, 59, 39, 45, 37, 50, 44, 52, 41, 54};

  initial begin
    lists[0] = {};
    lists[1] = {59};
    lists[2] = {39, 59};
    lists[3] = {31, 45, 59};
    lists[4] = {26, 37, 48, 60};
    lists[5] = {23, 32, 41, 50, 59};
    lists[6] = {20, 28, 36, 44, 52, 59};
    lists[7] = {18, 25, 32, 39, 46, 52, 59};
    lists[8] = {17, 23, 29, 35, 41, 47, 53, 59};
    lists[9] = {15, 21, 26, 32, 37, 43, 48, 54, 59};
    for (int d = 0; d < 16; d++) begin
      digit = nibble_t'(d);
      #1;
      if (d < 10) begin
        patterns[d]  = pattern;
        chosen_ts[d] = ts;
      end else begin
        checks++;
        if (pattern != '0 || ts != '0) failures++;
      end
    end
    for (int d = 0; d < 10; d++) begin
      for (int t = 0; t < 61; t++) begin
        bit exp_spike;
        exp_spike = 0;
        foreach (lists[d][i]) if (lists[d][i] == t) exp_spike = 1;
        checks++;
        if (patterns[d][t] !== exp_spike) begin
          failures++;
          $display("FAIL digit %0d t=%0d spike=%0b expected %0b", d, t, patterns[d][t], exp_spike);
        end
      end
      checks++;
      if (int'(chosen_ts[d]) != chosen[d]) begin
        failures++;
        $display("FAIL digit %0d chosen %0d expected %0d", d, chosen_ts[d], chosen[d]);
      end
      // number of spikes equals the digit
      checks++;
      if ($countones(patterns[d]) != d) begin
        failures++;
        $display("FAIL digit %0d has %0d spikes", d, $countones(patterns[d]));
      end
    end
    for (int a = 1; a < 10; a++) begin
      checks++;
      if (chosen_ts[a] % 16 == 0) failures++;
      for (int b = a + 1; b < 10; b++) begin
        checks++;
        if (chosen_ts[a] % 16 == chosen_ts[b] % 16) begin
          failures++;
          $display("FAIL remainder collision digits %0d %0d", a, b);
        end
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
