// spike_pattern_rom: the spike trains of the ten digit neurons and the chosen spike
// time of each digit.
//
// Each digit 0..9 corresponds to one constant input current of a LIF neuron; over a
// 60 ms window (time steps 0..60) the neuron fires 0..9 times. The spike times and the
// spike chosen as the cipher basis are constants of that characterisation and are
// hard-wired here, exactly as the paper tabulates them (digit 4 ends at step 60, the
// others at 59). The paper generates the patterns in software and keeps them in memory;
// how they would be loaded into logic is not described, so this design fixes them.
//
// Interface: combinational read port. pattern[t] is 1 when the neuron of digit `digit`
// spikes at step t; chosen_ts is the timestamp used to encrypt that digit (0 for digit 0,
// which never spikes). Addresses 10..15 read as all zero.
module spike_pattern_rom
  import steg_pkg::*;
(
  input  nibble_t      digit,
  output spike_train_t pattern,
  output tstamp_t      chosen_ts
);

  // Sets the bits of a spike train from a list of spike times (-1 ends the list).
  function automatic spike_train_t train(input int t0 = -1, t1 = -1, t2 = -1, t3 = -1,
                                         t4 = -1, t5 = -1, t6 = -1, t7 = -1, t8 = -1);
    int ts [9];
    spike_train_t s;
    ts = '{t0, t1, t2, t3, t4, t5, t6, t7, t8};
    s  = '0;
    for (int i = 0; i < 9; i++)
      if (ts[i] >= 0) s[ts[i]] = 1'b1;
    return s;
  endfunction

  always_comb begin
    unique case (digit)
      4'd1:    begin pattern = train(59);                                  chosen_ts = 6'd59; end
      4'd2:    begin pattern = train(39, 59);                              chosen_ts = 6'd39; end
      4'd3:    begin pattern = train(31, 45, 59);                          chosen_ts = 6'd45; end
      4'd4:    begin pattern = train(26, 37, 48, 60);                      chosen_ts = 6'd37; end
      4'd5:    begin pattern = train(23, 32, 41, 50, 59);                  chosen_ts = 6'd50; end
      4'd6:    begin pattern = train(20, 28, 36, 44, 52, 59);              chosen_ts = 6'd44; end
      4'd7:    begin pattern = train(18, 25, 32, 39, 46, 52, 59);          chosen_ts = 6'd52; end
      4'd8:    begin pattern = train(17, 23, 29, 35, 41, 47, 53, 59);      chosen_ts = 6'd41; end
      4'd9:    begin pattern = train(15, 21, 26, 32, 37, 43, 48, 54, 59);  chosen_ts = 6'd54; end
      default: begin pattern = '0;                                         chosen_ts = 6'd0;  end
    endcase
  end

endmodule
