// tb_steganosnn_full: one complete operation at the design's default size. A full-HD
// frame (1920 x 1080 pixels = 691,200 audio samples, 14.4 s of mono or 7.2 s of stereo
// 48 kHz audio) is embedded by the Encryptor and recovered by the Decryptor, with the
// stego stream looped between them. Samples and cover pixels are generated from their
// index by a hash, so the checker can recompute them without storing the frame. Checks:
// every recovered sample and the single tlast at the frame end, every stego pixel against
// the reference model, no frame overflow and no decode error for an exactly full frame.
// The mean squared error and PSNR over the R, G, B channels are printed.
module tb_steganosnn_full;
  import steg_pkg::*;
  import tb_ref_pkg::*;

  localparam int NPIX = 1920 * 1080, NS = NPIX / 3;

  logic clk = 0, rst_n = 0;
  logic [31:0] enc_s_tdata = '0, enc_m_tdata, dec_s_tdata = '0, dec_m_tdata;
  logic enc_s_tvalid = 0, enc_s_tready, enc_s_tlast = 0;
  logic enc_m_tvalid, enc_m_tready, enc_m_tlast;
  logic dec_s_tvalid = 0, dec_s_tready, dec_s_tlast = 0;
  logic dec_m_tvalid, dec_m_tready, dec_m_tlast;
  logic frame_overflow, decode_error;
  longint cycles = 0;
  int checks = 0, failures = 0;

  assign enc_m_tready = 1'b1;
  assign dec_m_tready = 1'b1;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  steganosnn_top dut (
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

  function automatic logic [31:0] mix(input logic [31:0] x);
    x = x ^ (x >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    return x ^ (x >> 16);
  endfunction

  function automatic int sample_of(input int j);
    if (j == 0) return -32768;
    if (j == 1) return 32767;
    return int'($signed(mix(32'(j) ^ 32'h5a5a_0000) [15:0]));
  endfunction

  function automatic logic [31:0] cover_of(input int k);
    return mix(32'(k) + 32'h1234_5678);
  endfunction

  // Encryptor input: word w of group j is the sample (w = 0) or pixel w-1.
  int in_word = 0;  // index of the word currently presented
  always @(posedge clk) if (rst_n) begin
    if (!enc_s_tvalid || enc_s_tready) begin
      if (in_word < 4 * NS) begin
        int j, w;
        j = in_word / 4;
        w = in_word % 4;
        enc_s_tdata  <= (w == 0) ? 32'(sample_of(j)) : cover_of(3 * j + w - 1);
        enc_s_tlast  <= (in_word == 4 * NS - 1);
        enc_s_tvalid <= 1'b1;
        in_word++;
      end else enc_s_tvalid <= 1'b0;
    end
  end

  // Encryptor output -> FIFO -> Decryptor input, checking every stego pixel.
  logic [32:0] loop_q [$];
  int out_word = 0;
  longint sq_err = 0;
  always @(posedge clk) if (rst_n) begin
    if (enc_m_tvalid) begin
      int j, w;
      j = out_word / 4;
      w = out_word % 4;
      if (w < 3) begin
        logic [31:0] c, e;
        c = cover_of(3 * j + w);
        e = ref_pix(c, (3 * j + w) % 3, 8'(cipher_bits(sample_of(j)) >> (8 * (2 - w))));
        checks++;
        if (enc_m_tdata !== e) begin
          failures++;
          if (failures < 10) $display("FAIL stego pixel %0d: %h expected %h", 3 * j + w, enc_m_tdata, e);
        end
        for (int ch = 1; ch < 4; ch++) begin
          int d;
          d = int'(enc_m_tdata[8*ch +: 8]) - int'(c[8*ch +: 8]);
          sq_err += d * d;
        end
      end
      out_word++;
      loop_q.push_back({enc_m_tlast, enc_m_tdata});
    end
    if (dec_s_tvalid && dec_s_tready) dec_s_tvalid <= 1'b0;
    if ((!dec_s_tvalid || dec_s_tready) && loop_q.size() > 0) begin
      logic [32:0] b;
      b = loop_q.pop_front();
      dec_s_tdata  <= b[31:0];
      dec_s_tlast  <= b[32];
      dec_s_tvalid <= 1'b1;
    end
  end

  // Decryptor output
  int n_audio = 0, n_last = 0;
  always @(posedge clk) if (rst_n && dec_m_tvalid) begin
    checks++;
    if ($signed(dec_m_tdata) != sample_of(n_audio) || dec_m_tlast !== (n_audio == NS - 1)) begin
      failures++;
      if (failures < 10)
        $display("FAIL sample %0d: %0d expected %0d", n_audio, $signed(dec_m_tdata), sample_of(n_audio));
    end
    if (dec_m_tlast) n_last++;
    n_audio++;
  end

  initial begin
    real mse;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (n_audio == NS);
    repeat (10) @(negedge clk);
    checks += 4;
    if (n_last != 1) failures++;
    if (out_word != 4 * NS) failures++;
    if (frame_overflow) failures++;
    if (decode_error) failures++;
    mse = real'(sq_err) / (3.0 * NPIX);
    $display("frame of %0d pixels, %0d samples, %0d cycles; RGB MSE %f, PSNR %f dB", NPIX, NS,
             cycles, mse, 10.0 * $log10(255.0 * 255.0 / mse));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 64'd20_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
