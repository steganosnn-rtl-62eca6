// digit_extractor: sign and decimal digits of a 16-bit audio sample (double dabble).
//
// The sample is split into a sign (0 positive, 1 negative) and the five decimal digits
// of its magnitude, 0..32768. The magnitude is converted from binary to BCD with the
// double-dabble (shift-and-add-3) algorithm, as the paper's Digit Extractor does: on each
// step every BCD nibble of 5 or more gets 3 added, then the BCD/binary register shifts
// left by one bit. Doing one step per clock is this design's choice.
//
// Interface and timing: pulse start with sample for one cycle while busy is low. busy
// stays high for SAMPLE_W (16) cycles; done pulses in the cycle in which sign and digits
// become valid, SAMPLE_W cycles after start. The outputs hold until the next start.
// digits[4] is the ten-thousands digit, digits[0] the units.
module digit_extractor
  import steg_pkg::*;
#(
  parameter int SAMPLE_W = 16,
  parameter int N_DIGITS = N_MAG_DIGITS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [SAMPLE_W-1:0] sample,
  output logic                busy,
  output logic                done,
  output logic                sign,
  output nibble_t             digits [N_DIGITS]
);

  localparam int CNT_W = $clog2(SAMPLE_W + 1);

  logic [SAMPLE_W-1:0]   bin_q;
  logic [4*N_DIGITS-1:0] bcd_q;
  logic [CNT_W-1:0]      cnt_q;

  // One double-dabble step: add 3 to every nibble >= 5, then shift in the next bit.
  function automatic logic [4*N_DIGITS-1:0] dd_step(input logic [4*N_DIGITS-1:0] bcd,
                                                    input logic in_bit);
    logic [4*N_DIGITS-1:0] adj;
    adj = bcd;
    for (int i = 0; i < N_DIGITS; i++)
      if (adj[4*i +: 4] >= 4'd5) adj[4*i +: 4] = adj[4*i +: 4] + 4'd3;
    return {adj[4*N_DIGITS-2:0], in_bit};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      sign  <= 1'b0;
      bin_q <= '0;
      bcd_q <= '0;
      cnt_q <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        sign  <= sample[SAMPLE_W-1];
        // Two's-complement magnitude; -32768 gives 32768, which still fits in 16 bits.
        bin_q <= sample[SAMPLE_W-1] ? SAMPLE_W'(-sample) : sample;
        bcd_q <= '0;
        cnt_q <= '0;
      end else if (busy) begin
        bcd_q <= dd_step(bcd_q, bin_q[SAMPLE_W-1]);
        bin_q <= {bin_q[SAMPLE_W-2:0], 1'b0};
        cnt_q <= cnt_q + 1'b1;
        if (cnt_q == CNT_W'(SAMPLE_W - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_comb
    for (int i = 0; i < N_DIGITS; i++) digits[i] = bcd_q[4*i +: 4];

endmodule
