// steg_encryptor: the Encryptor core. Hides 16-bit audio samples in RGBA pixels.
//
// Per audio sample the core takes four 32-bit words on its AXI-Stream slave: the
// sample (two's complement in bits [15:0]) followed by three cover pixels. The sample
// is split into a sign and five decimal digits by the double-dabble digit extractor;
// each of those six symbols is encrypted by spike_key_mapper into a 4-bit cipher (a
// spike time modulo 16) and a 4-bit KEY (the spike's index in its pattern). The 24
// cipher bits, sign symbol first, are written into the two LSBs of R, G, B, A of the
// three pixels after a cyclic 0..DITHER_MAX dither offset has been added to every
// channel. The master emits the three stego pixels and then one KEY word
// {8'h00, k0, k1, k2, k3, k4, k5} (k0, the sign symbol's KEY, in [23:20]), which the
// decryptor needs with the pixels.
//
// From the paper: the stages (digit extraction by double dabble, modulo-16 spike
// encryption with KEY, 0-2 cyclic pseudo-noise, 2-LSB substitution into RGBA), three
// pixels per sample, 32-bit streams and the full-HD frame size. This design's choices:
// the word order on both streams, the KEY word layout, saturation of dithered channels,
// and the frame-capacity check: pixels are counted from the start of a frame (the word
// after one with tlast) and frame_overflow is set, and stays set until reset, when a
// frame holds more than IMG_W*IMG_H pixels. tlast of an input group is passed on with
// its KEY word.
//
// Timing: the audio word is accepted in one cycle, digit extraction then takes 16
// cycles and one more cycle hands the digits over; the three pixels and the KEY word
// take one cycle each while the output register is free. Unstalled, one sample is
// accepted every 22 cycles. tready is low while the digits are being extracted and
// while the output register is full.
module steg_encryptor
  import steg_pkg::*;
#(
  parameter int IMG_W      = 1920,
  parameter int IMG_H      = 1080,
  parameter int DITHER_MAX = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // cover stream: audio word, pixel 0, pixel 1, pixel 2, ...
  input  logic [WORD_W-1:0] s_axis_tdata,
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  input  logic              s_axis_tlast,
  // stego stream: pixel 0, pixel 1, pixel 2, KEY word, ...
  output logic [WORD_W-1:0] m_axis_tdata,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  output logic              m_axis_tlast,
  output logic              frame_overflow
);

  localparam int FRAME_PIX = IMG_W * IMG_H;
  localparam int PCNT_W    = $clog2(FRAME_PIX + 1);

  typedef enum logic [1:0] {S_AUDIO, S_CONV, S_PIX, S_KEY} state_t;

  state_t            state_q;
  logic [1:0]        pix_idx_q;
  logic              last_q;
  logic [PCNT_W-1:0] pix_cnt_q;

  // ---- digit extraction --------------------------------------------------------------
  logic    dd_start, dd_busy, dd_done, dd_sign;
  nibble_t dd_digits [N_MAG_DIGITS];

  digit_extractor u_digits (
    .clk   (clk),
    .rst_n (rst_n),
    .start (dd_start),
    .sample(s_axis_tdata[15:0]),
    .busy  (dd_busy),
    .done  (dd_done),
    .sign  (dd_sign),
    .digits(dd_digits)
  );

  // ---- encryption of the six symbols ---------------------------------------------------
  nibble_t  sym    [SYMS_PER_SAMPLE];
  nibble_t  cipher [SYMS_PER_SAMPLE];
  nibble_t  key    [SYMS_PER_SAMPLE];
  sym_vec_t cipher_bits, key_bits;

  always_comb begin
    sym[0] = {3'b000, dd_sign};
    for (int i = 1; i < SYMS_PER_SAMPLE; i++) sym[i] = dd_digits[N_MAG_DIGITS - i];
  end

  for (genvar i = 0; i < SYMS_PER_SAMPLE; i++) begin : g_map
    spike_key_mapper u_map (
      .digit (sym[i]),
      .cipher(cipher[i]),
      .key   (key[i])
    );
    assign cipher_bits[4*(SYMS_PER_SAMPLE-1-i) +: 4] = cipher[i];
    assign key_bits   [4*(SYMS_PER_SAMPLE-1-i) +: 4] = key[i];
  end

  // ---- dither and embedding ------------------------------------------------------------
  logic [1:0] offset;
  logic [7:0] payload;
  rgba_t      stego_pix;
  logic       out_free, in_fire, pix_fire;

  assign out_free = !m_axis_tvalid || m_axis_tready;
  assign in_fire  = s_axis_tvalid && s_axis_tready;
  assign pix_fire = in_fire && (state_q == S_PIX);
  assign dd_start = in_fire && (state_q == S_AUDIO);

  pn_dither #(.DITHER_MAX(DITHER_MAX)) u_dither (
    .clk   (clk),
    .rst_n (rst_n),
    .step  (pix_fire),
    .offset(offset)
  );

  always_comb begin
    case (pix_idx_q)
      2'd0:    payload = cipher_bits[23:16];
      2'd1:    payload = cipher_bits[15:8];
      default: payload = cipher_bits[7:0];
    endcase
  end

  lsb_embedder u_embed (
    .pix_in (rgba_t'(s_axis_tdata)),
    .offset (offset),
    .payload(payload),
    .pix_out(stego_pix)
  );

  // ---- control -------------------------------------------------------------------------
  always_comb begin
    case (state_q)
      S_AUDIO: s_axis_tready = !dd_busy;
      S_PIX:   s_axis_tready = out_free;
      default: s_axis_tready = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q        <= S_AUDIO;
      pix_idx_q      <= '0;
      last_q         <= 1'b0;
      pix_cnt_q      <= '0;
      frame_overflow <= 1'b0;
      m_axis_tdata   <= '0;
      m_axis_tvalid  <= 1'b0;
      m_axis_tlast   <= 1'b0;
    end else begin
      if (m_axis_tready) m_axis_tvalid <= 1'b0;
      unique case (state_q)
        S_AUDIO: if (in_fire) begin
          last_q  <= s_axis_tlast;
          state_q <= S_CONV;
        end
        S_CONV: if (dd_done) begin
          pix_idx_q <= '0;
          state_q   <= S_PIX;
        end
        S_PIX: if (pix_fire) begin
          m_axis_tdata  <= stego_pix;
          m_axis_tvalid <= 1'b1;
          m_axis_tlast  <= 1'b0;
          last_q        <= last_q | s_axis_tlast;
          if (pix_cnt_q == PCNT_W'(FRAME_PIX)) frame_overflow <= 1'b1;
          else                                 pix_cnt_q      <= pix_cnt_q + 1'b1;
          pix_idx_q <= pix_idx_q + 1'b1;
          if (pix_idx_q == 2'(PIX_PER_SAMPLE - 1)) state_q <= S_KEY;
        end
        S_KEY: if (out_free) begin
          m_axis_tdata  <= {8'h00, key_bits};
          m_axis_tvalid <= 1'b1;
          m_axis_tlast  <= last_q;
          if (last_q) pix_cnt_q <= '0;
          state_q <= S_AUDIO;
        end
        default: state_q <= S_AUDIO;
      endcase
    end
  end

  // AXI-Stream: once valid, a beat holds its data until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata)
                                        && $stable(m_axis_tlast));

endmodule
