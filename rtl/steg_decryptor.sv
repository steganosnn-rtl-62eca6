// steg_decryptor: the Decryptor core. Recovers audio samples from stego pixels.
//
// Per audio sample the core takes four 32-bit words on its AXI-Stream slave: three
// stego pixels and the KEY word produced by steg_encryptor. The two LSBs of R, G, B, A
// of each pixel are read back (LSB decoding), giving six 4-bit cipher symbols; each,
// with its 4-bit KEY, goes to a spike_digit_decoder that searches the candidate spike
// times r, r+16, r+32, r+48 against the stored spike patterns. The sign symbol and the
// five digits are then reassembled into the signed 16-bit sample, which leaves on the
// master sign-extended to 32 bits, with the tlast of its input group.
//
// From the paper: LSB extraction, the candidate search with KEY, and reassembly into a
// 16-bit sample. This design's choices: the input word order (that of the encryptor's
// output), the KEY word layout ({8'h00, k0..k5}, k0 in [23:20]), the output word format,
// and decode_error, which is set and stays set until reset when a symbol matches no
// digit, the sign symbol is not 0 or 1, or the digits give no 16-bit sample; the sample
// is still emitted in that case.
//
// Timing: the four input words are accepted one per cycle, decoding takes one more cycle,
// so an unstalled sample takes 5 cycles. The KEY word is accepted only when the previous
// result has left the output register.
module steg_decryptor
  import steg_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // stego stream: pixel 0, pixel 1, pixel 2, KEY word, ...
  input  logic [WORD_W-1:0] s_axis_tdata,
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  input  logic              s_axis_tlast,
  // audio stream: one sign-extended sample per group
  output logic [WORD_W-1:0] m_axis_tdata,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  output logic              m_axis_tlast,
  output logic              decode_error
);

  typedef enum logic [1:0] {S_PIX, S_KEY, S_DEC} state_t;

  state_t     state_q;
  logic [1:0] pix_idx_q;
  logic       last_q;
  sym_vec_t   cipher_q, key_q;

  logic out_free, in_fire;
  assign out_free = !m_axis_tvalid || m_axis_tready;
  assign in_fire  = s_axis_tvalid && s_axis_tready;

  always_comb begin
    case (state_q)
      S_PIX:   s_axis_tready = 1'b1;
      S_KEY:   s_axis_tready = 1'b1;
      default: s_axis_tready = 1'b0;
    endcase
  end

  // ---- LSB decoding ----------------------------------------------------------------------
  rgba_t      in_pix;
  logic [7:0] in_bits;
  assign in_pix  = rgba_t'(s_axis_tdata);
  assign in_bits = {in_pix.r[1:0], in_pix.g[1:0], in_pix.b[1:0], in_pix.a[1:0]};

  // ---- symbol decoding -------------------------------------------------------------------
  nibble_t          sym   [SYMS_PER_SAMPLE];
  logic [SYMS_PER_SAMPLE-1:0] sym_ok;
  nibble_t          digits [N_MAG_DIGITS];
  logic [15:0]      sample;
  logic             range_err, bad;

  for (genvar i = 0; i < SYMS_PER_SAMPLE; i++) begin : g_dec
    spike_digit_decoder u_dec (
      .cipher(cipher_q[4*(SYMS_PER_SAMPLE-1-i) +: 4]),
      .key   (key_q   [4*(SYMS_PER_SAMPLE-1-i) +: 4]),
      .digit (sym[i]),
      .valid (sym_ok[i])
    );
  end

  always_comb
    for (int i = 0; i < N_MAG_DIGITS; i++) digits[i] = sym[SYMS_PER_SAMPLE - 1 - i];

  sample_reassembler u_reasm (
    .sign     (sym[0][0]),
    .digits   (digits),
    .sample   (sample),
    .range_err(range_err)
  );

  assign bad = !(&sym_ok) || (sym[0] > 4'd1) || range_err;

  // ---- control -----------------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_PIX;
      pix_idx_q     <= '0;
      last_q        <= 1'b0;
      cipher_q      <= '0;
      key_q         <= '0;
      decode_error  <= 1'b0;
      m_axis_tdata  <= '0;
      m_axis_tvalid <= 1'b0;
      m_axis_tlast  <= 1'b0;
    end else begin
      if (m_axis_tready) m_axis_tvalid <= 1'b0;
      unique case (state_q)
        S_PIX: if (in_fire) begin
          cipher_q[8*(PIX_PER_SAMPLE-1-int'(pix_idx_q)) +: 8] <= in_bits;
          last_q    <= (pix_idx_q == 2'd0) ? s_axis_tlast : (last_q | s_axis_tlast);
          pix_idx_q <= pix_idx_q + 1'b1;
          if (pix_idx_q == 2'(PIX_PER_SAMPLE - 1)) begin
            pix_idx_q <= '0;
            state_q   <= S_KEY;
          end
        end
        S_KEY: if (in_fire) begin
          key_q   <= s_axis_tdata[23:0];
          last_q  <= last_q | s_axis_tlast;
          state_q <= S_DEC;
        end
        S_DEC: if (out_free) begin
          m_axis_tdata  <= {{(WORD_W-16){sample[15]}}, sample};
          m_axis_tvalid <= 1'b1;
          m_axis_tlast  <= last_q;
          if (bad) decode_error <= 1'b1;
          state_q <= S_PIX;
        end
        default: state_q <= S_PIX;
      endcase
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata)
                                        && $stable(m_axis_tlast));

endmodule
