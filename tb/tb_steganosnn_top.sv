// tb_steganosnn_top: end-to-end test of the top at a small frame size (6x4 pixels, 8
// samples per frame). Audio samples and cover pixels enter the Encryptor; its stego
// stream is looped through a FIFO, as DRAM would hold it, into the Decryptor, whose
// output must reproduce every sample bit for bit with tlast at the end of each frame.
// Every stego pixel is also checked to lie within the dither-plus-substitution bound of
// its cover pixel (-3..+5 per channel) and to carry the right cipher bits.
//
// Mechanisms that must each occur at least once: input stall of the Encryptor, output
// back-pressure on both cores, each dither offset 0, 1 and 2, channel saturation,
// negative samples, the frame end (tlast), the frame-capacity overflow and a decode error
// from a corrupted KEY word.
module tb_steganosnn_top;
  import steg_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = 6, H = 4, SPF = W * H / 3;

  logic clk = 0, rst_n = 0;
  logic [31:0] enc_s_tdata = '0, enc_m_tdata, dec_s_tdata = '0, dec_m_tdata;
  logic enc_s_tvalid = 0, enc_s_tready, enc_s_tlast = 0;
  logic enc_m_tvalid, enc_m_tready = 0, enc_m_tlast;
  logic dec_s_tvalid = 0, dec_s_tready, dec_s_tlast = 0;
  logic dec_m_tvalid, dec_m_tready = 0, dec_m_tlast;
  logic frame_overflow, decode_error;
  int checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  steganosnn_top #(.IMG_W(W), .IMG_H(H)) dut (
    .clk, .rst_n,
    .enc_s_axis_tdata(enc_s_tdata), .enc_s_axis_tvalid(enc_s_tvalid),
    .enc_s_axis_tready(enc_s_tready), .enc_s_axis_tlast(enc_s_tlast),
    .enc_m_axis_tdata(enc_m_tdata), .enc_m_axis_tvalid(enc_m_tvalid),
    .enc_m_axis_tready(enc_m_tready), .enc_m_axis_tlast(enc_m_tlast),
    .dec_s_axis_tdata(dec_s_tdata), .dec_s_axis_tvalid(dec_s_tvalid),
    .dec_s_axis_tready(dec_s_tready), .dec_s_axis_tlast(dec_s_tlast),
    .dec_m_axis_tdata(dec_m_tdata), .dec_m_axis_tvalid(dec_m_tvalid),
    .dec_m_axis_tready(dec_m_tready), .dec_m_axis_tlast(dec_m_tlast),
    .frame_overflow, .decode_error);

  typedef struct {logic [31:0] data; logic last;} beat_t;
  typedef struct {int s; logic last; bit dont_care;} audio_t;

  beat_t  enc_in_q [$];   // words still to send to the Encryptor
  beat_t  loop_q   [$];   // stego words between the cores
  logic [31:0] cover_q [$];
  int     cover_off_q [$];
  int     sample_q [$];   // sample of each group, for the cipher-bit check
  audio_t audio_q  [$];   // expected Decryptor output

  int n_in_stall = 0, n_enc_bp = 0, n_dec_bp = 0, n_sat = 0, n_neg = 0, n_last = 0;
  int n_off [3] = '{0, 0, 0};
  int enc_word = 0, n_audio = 0;
  bit gaps = 1, corrupt_key = 0;

  // ---- stream plumbing and monitors ----------------------------------------------------
  always @(posedge clk) if (rst_n) begin
    // Encryptor input
    if (enc_s_tvalid && !enc_s_tready) n_in_stall++;
    if (enc_s_tvalid && enc_s_tready) enc_s_tvalid <= 1'b0;
    if ((!enc_s_tvalid || enc_s_tready) && enc_in_q.size() > 0 &&
        (!gaps || $urandom_range(0, 3) != 0)) begin
      beat_t b;
      b = enc_in_q.pop_front();
      enc_s_tdata  <= b.data;
      enc_s_tlast  <= b.last;
      enc_s_tvalid <= 1'b1;
    end
    // dither offsets and saturation, seen where the Encryptor takes a pixel
    if (dut.u_encryptor.pix_fire) begin
      rgba_t p;
      int off;
      off = int'(dut.u_encryptor.offset);
      n_off[off]++;
      p = rgba_t'(enc_s_tdata);
      if (int'(p.r) + off > 255 || int'(p.g) + off > 255 || int'(p.b) + off > 255 ||
          int'(p.a) + off > 255) n_sat++;
    end
    // Encryptor output -> loop FIFO, with the stego pixel checks
    if (enc_m_tvalid && !enc_m_tready) n_enc_bp++;
    if (enc_m_tvalid && enc_m_tready) begin
      logic [31:0] d;
      d = enc_m_tdata;
      if (enc_word % 4 < 3) begin
        logic [31:0] c, e;
        int s;
        c = cover_q.pop_front();
        s = sample_q[0];
        e = ref_pix(c, cover_off_q.pop_front(), cipher_bits(s) >> (8 * (2 - enc_word % 4)));
        checks++;
        for (int ch = 0; ch < 4; ch++) begin
          int diff;
          diff = int'(d[8*ch +: 8]) - int'(c[8*ch +: 8]);
          if (diff < -3 || diff > 5) begin
            failures++;
            $display("FAIL stego channel off by %0d", diff);
          end
        end
        if (d !== e) begin
          failures++;
          $display("FAIL stego pixel %h expected %h (sample %0d)", d, e, s);
        end
      end else begin
        void'(sample_q.pop_front());
        if (corrupt_key) d = d ^ 32'h1;
      end
      enc_word++;
      loop_q.push_back('{d, enc_m_tlast});
    end
    // loop FIFO -> Decryptor input
    if (dec_s_tvalid && dec_s_tready) dec_s_tvalid <= 1'b0;
    if ((!dec_s_tvalid || dec_s_tready) && loop_q.size() > 0 &&
        (!gaps || $urandom_range(0, 4) != 0)) begin
      beat_t b;
      b = loop_q.pop_front();
      dec_s_tdata  <= b.data;
      dec_s_tlast  <= b.last;
      dec_s_tvalid <= 1'b1;
    end
    // Decryptor output
    if (dec_m_tvalid && !dec_m_tready) n_dec_bp++;
    if (dec_m_tvalid && dec_m_tready) begin
      audio_t a;
      checks++;
      n_audio++;
      if (audio_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected audio %h", dec_m_tdata);
      end else begin
        a = audio_q.pop_front();
        if (!a.dont_care && ($signed(dec_m_tdata) != a.s || dec_m_tlast !== a.last)) begin
          failures++;
          $display("FAIL audio %0d: %0d last %0b expected %0d last %0b", n_audio,
                   $signed(dec_m_tdata), dec_m_tlast, a.s, a.last);
        end
        if (dec_m_tlast) n_last++;
        if (a.s < 0) n_neg++;
      end
    end
  end

  always @(negedge clk) begin
    enc_m_tready <= gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
    dec_m_tready <= gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  // ---- stimulus ----------------------------------------------------------------------
  int pix_total = 0;

  task automatic push_sample(input int s, input logic last, input bit dont_care = 0);
    enc_in_q.push_back('{32'(s), 1'b0});
    sample_q.push_back(s);
    for (int i = 0; i < 3; i++) begin
      logic [31:0] p;
      p = $urandom;
      if ($urandom_range(0, 4) == 0) p[23:16] = 8'hFF;
      if ($urandom_range(0, 4) == 0) p[7:0]   = 8'hFE;
      enc_in_q.push_back('{p, (i == 2) ? last : 1'b0});
      cover_q.push_back(p);
      cover_off_q.push_back(pix_total % 3);
      pix_total++;
    end
    audio_q.push_back('{s, last, dont_care});
  endtask

  task automatic drain();
    int t;
    t = 0;
    while ((audio_q.size() > 0 || enc_in_q.size() > 0) && t < 20000) begin
      @(negedge clk);
      t++;
    end
    repeat (10) @(negedge clk);
  endtask

  task automatic expect_count(input string what, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end else $display("mechanism %-22s %0d", what, n);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    push_sample(12345, 1'b0);
    push_sample(-32768, 1'b0);
    push_sample(32767, 1'b0);
    push_sample(0, 1'b0);
    push_sample(-1, 1'b0);
    push_sample(-10000, 1'b0);
    push_sample(9, 1'b0);
    push_sample(-5, 1'b1);
    for (int f = 0; f < 20; f++)
      for (int j = 0; j < SPF; j++)
        push_sample(int'($signed(16'($urandom))), j == SPF - 1);
    drain();
    checks += 3;
    if (audio_q.size() != 0) begin
      failures++;
      $display("FAIL %0d samples not recovered", audio_q.size());
    end
    if (frame_overflow) failures++;
    if (decode_error) failures++;
    // a frame one sample longer than the image holds
    for (int j = 0; j <= SPF; j++) push_sample(-j * 1001, j == SPF);
    drain();
    checks++;
    if (!frame_overflow) failures++;
    // a KEY word damaged between the cores (units digit 5: KEY 3 becomes 2)
    corrupt_key = 1;
    push_sample(5, 1'b1, 1);
    drain();
    corrupt_key = 0;
    checks++;
    if (!decode_error) failures++;

    expect_count("encryptor input stall", n_in_stall);
    expect_count("encryptor back-pressure", n_enc_bp);
    expect_count("decryptor back-pressure", n_dec_bp);
    expect_count("dither offset 0", n_off[0]);
    expect_count("dither offset 1", n_off[1]);
    expect_count("dither offset 2", n_off[2]);
    expect_count("channel saturation", n_sat);
    expect_count("negative sample", n_neg);
    expect_count("frame end (tlast)", n_last);
    expect_count("frame overflow", int'(frame_overflow));
    expect_count("decode error", int'(decode_error));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 300000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
