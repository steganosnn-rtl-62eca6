// spike_digit_decoder: recovers one decimal digit from its (cipher, KEY) pair.
//
// The cipher r is a spike time modulo 16, so the spike that produced it lies at one of
// r, r+16, r+32 or r+48 within the 0..60 window. For every digit 1..9 and every such
// candidate time the decoder checks that the digit's pattern spikes there, that the
// spike's index in the pattern (the number of earlier spikes) equals KEY, and that the
// candidate is the timestamp the digit-key map assigns to the digit. Exactly one digit
// must pass; r = 0 is digit 0. All nine digits and four candidates are tested in
// parallel.
//
// The candidate set, the pattern match and the KEY test are the paper's. With the
// paper's patterns, KEY alone leaves three ties ((7,0): digits 2 and 5; (5,1): 4 and 9;
// (12,3): 4 and 6), so the check against the digit-key map, which the paper's decode
// step also uses, is applied as well and makes every valid pair decode uniquely.
//
// Interface: combinational. valid is low when no digit (or more than one) matches.
module spike_digit_decoder
  import steg_pkg::*;
(
  input  nibble_t cipher,
  input  nibble_t key,
  output nibble_t digit,
  output logic    valid
);

  spike_train_t patterns  [N_DIG];
  tstamp_t      chosen_ts [N_DIG];

  // one read port per digit, all read at once
  for (genvar d = 0; d < N_DIG; d++) begin : g_rom
    spike_pattern_rom u_rom (
      .digit    (nibble_t'(d)),
      .pattern  (patterns[d]),
      .chosen_ts(chosen_ts[d])
    );
  end

  logic [N_DIG-1:0] hit;
  nibble_t          n_hit;

  // True when candidate time c (which may lie past the window) is a spike of pattern p,
  // is the digit's mapped timestamp ts, and has index want among the spikes of p.
  function automatic logic cand_match(input spike_train_t p, input tstamp_t ts,
                                      input int c, input nibble_t want);
    nibble_t idx;
    if (c >= T_WIN || !p[c] || c != int'(ts)) return 1'b0;
    idx = '0;
    for (int t = 0; t < T_WIN; t++)
      if (t < c && p[t]) idx = idx + nibble_t'(1);
    return idx == want;
  endfunction

  always_comb begin
    hit = '0;
    if (cipher == '0) begin
      hit[0] = 1'b1;
    end else begin
      for (int d = 1; d < N_DIG; d++)
        for (int k = 0; k < T_WIN / MOD + 1; k++)
          if (cand_match(patterns[d], chosen_ts[d], int'(cipher) + MOD * k, key))
            hit[d] = 1'b1;
    end
  end

  always_comb begin
    digit = '0;
    for (int d = 0; d < N_DIG; d++)
      if (hit[d]) digit = nibble_t'(d);
    n_hit = '0;
    for (int d = 0; d < N_DIG; d++)
      n_hit = n_hit + nibble_t'(hit[d]);
    valid = (n_hit == nibble_t'(1));
  end

endmodule
