// steganosnn_top: programmable-logic side of the audio-in-image steganography system.
//
// Two independent stream cores: the Encryptor, which turns an interleaved stream of
// audio samples and cover pixels (one sample, then three pixels) into stego pixels plus
// one KEY word per sample, and the Decryptor, which turns stego pixels plus KEY words
// back into audio samples. In a system each core's slave and master are connected to
// an AXI DMA engine that moves the data to and from DRAM under control of the host
// processor; those parts are outside this module and meet it at the stream ports.
// The paper loads the two cores as two separate FPGA configurations; placing them side
// by side in one top, sharing the clock and reset, is this design's choice, and each
// can be used on its own.
//
// Ports: enc_* are the Encryptor's streams, dec_* the Decryptor's, all 32 bits wide with
// tvalid/tready/tlast. frame_overflow and decode_error are the cores' sticky status
// flags. Timing is that of the two cores (22 and 5 cycles per sample unstalled).
module steganosnn_top
  import steg_pkg::*;
#(
  parameter int IMG_W      = 1920,
  parameter int IMG_H      = 1080,
  parameter int DITHER_MAX = 2
) (
  input  logic              clk,
  input  logic              rst_n,

  input  logic [WORD_W-1:0] enc_s_axis_tdata,
  input  logic              enc_s_axis_tvalid,
  output logic              enc_s_axis_tready,
  input  logic              enc_s_axis_tlast,
  output logic [WORD_W-1:0] enc_m_axis_tdata,
  output logic              enc_m_axis_tvalid,
  input  logic              enc_m_axis_tready,
  output logic              enc_m_axis_tlast,

  input  logic [WORD_W-1:0] dec_s_axis_tdata,
  input  logic              dec_s_axis_tvalid,
  output logic              dec_s_axis_tready,
  input  logic              dec_s_axis_tlast,
  output logic [WORD_W-1:0] dec_m_axis_tdata,
  output logic              dec_m_axis_tvalid,
  input  logic              dec_m_axis_tready,
  output logic              dec_m_axis_tlast,

  output logic              frame_overflow,
  output logic              decode_error
);

  steg_encryptor #(
    .IMG_W     (IMG_W),
    .IMG_H     (IMG_H),
    .DITHER_MAX(DITHER_MAX)
  ) u_encryptor (
    .clk           (clk),
    .rst_n         (rst_n),
    .s_axis_tdata  (enc_s_axis_tdata),
    .s_axis_tvalid (enc_s_axis_tvalid),
    .s_axis_tready (enc_s_axis_tready),
    .s_axis_tlast  (enc_s_axis_tlast),
    .m_axis_tdata  (enc_m_axis_tdata),
    .m_axis_tvalid (enc_m_axis_tvalid),
    .m_axis_tready (enc_m_axis_tready),
    .m_axis_tlast  (enc_m_axis_tlast),
    .frame_overflow(frame_overflow)
  );

  steg_decryptor u_decryptor (
    .clk          (clk),
    .rst_n        (rst_n),
    .s_axis_tdata (dec_s_axis_tdata),
    .s_axis_tvalid(dec_s_axis_tvalid),
    .s_axis_tready(dec_s_axis_tready),
    .s_axis_tlast (dec_s_axis_tlast),
    .m_axis_tdata (dec_m_axis_tdata),
    .m_axis_tvalid(dec_m_axis_tvalid),
    .m_axis_tready(dec_m_axis_tready),
    .m_axis_tlast (dec_m_axis_tlast),
    .decode_error (decode_error)
  );

endmodule
