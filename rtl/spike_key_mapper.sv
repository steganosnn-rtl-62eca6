// spike_key_mapper: encrypts one decimal digit into a (cipher, KEY) pair.
//
// The cipher is the chosen spike time of the digit's LIF pattern modulo 16 (its low four
// bits); the chosen times are picked so that the ten remainders are distinct and only
// digit 0 gives 0. The KEY is the ordinal index of the chosen spike in the pattern,
// counted from zero, i.e. the number of spikes earlier than it. Both rules are the
// paper's; computing the KEY as a population count instead of storing it is this
// design's choice and gives the same values as the paper's table.
//
// Interface: combinational. digit 0..9 in (the sign symbol uses 0 and 1); cipher and key
// out. Digit 0 has no spike and yields (0, 0).
module spike_key_mapper
  import steg_pkg::*;
(
  input  nibble_t digit,
  output nibble_t cipher,
  output nibble_t key
);

  spike_train_t pattern;
  tstamp_t      chosen_ts;

  spike_pattern_rom u_rom (
    .digit    (digit),
    .pattern  (pattern),
    .chosen_ts(chosen_ts)
  );

  // Number of spikes in p earlier than time step ts, i.e. the index of the spike at ts.
  function automatic nibble_t spikes_before(input spike_train_t p, input tstamp_t ts);
    nibble_t n;
    n = '0;
    for (int t = 0; t < T_WIN; t++)
      if (t < int'(ts) && p[t]) n = n + nibble_t'(1);
    return n;
  endfunction

  always_comb begin
    cipher = '0;
    key    = '0;
    if (digit != '0 && int'(digit) < N_DIG) begin
      cipher = nibble_t'(int'(chosen_ts) % MOD);
      key    = spikes_before(pattern, chosen_ts);
    end
  end

endmodule
