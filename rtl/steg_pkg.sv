// steg_pkg: types and constants shared by the audio-in-image steganography cores.
//
// A 16-bit audio sample becomes six 4-bit symbols (a sign symbol and five decimal
// digits). Each symbol is encrypted to the remainder modulo 16 of one spike time of
// a leaky integrate-and-fire (LIF) neuron pattern; the 24 cipher bits are hidden in the
// two least significant bits of the R, G, B and A channels of three pixels. All stream
// words are 32 bits wide.
//
// The window length (61 time steps), the modulus, the six symbols per sample and the
// three pixels per sample follow the paper. The packing of a pixel into a 32-bit word
// (R in the top byte, A in the bottom byte) and of the KEY word are this design's choice.
package steg_pkg;

  localparam int T_WIN           = 61;  // spike time steps 0..60
  localparam int TS_W            = 6;   // width of a timestamp 0..60
  localparam int MOD             = 16;  // cipher = timestamp mod 16
  localparam int N_DIG           = 10;  // digits 0..9
  localparam int N_MAG_DIGITS    = 5;   // decimal digits of |sample|
  localparam int SYMS_PER_SAMPLE = 6;   // sign + five digits
  localparam int PIX_PER_SAMPLE  = 3;   // 24 cipher bits / 8 bits per pixel
  localparam int WORD_W          = 32;  // AXI-Stream data width

  typedef logic [3:0]       nibble_t;
  typedef logic [T_WIN-1:0] spike_train_t;  // bit t set = spike at time step t
  typedef logic [TS_W-1:0]  tstamp_t;

  // One RGBA pixel as carried in a 32-bit stream word.
  typedef struct packed {
    logic [7:0] r;
    logic [7:0] g;
    logic [7:0] b;
    logic [7:0] a;
  } rgba_t;

  // Six 4-bit values of one sample, symbol 0 (the sign) in the top nibble.
  typedef logic [SYMS_PER_SAMPLE*4-1:0] sym_vec_t;

endpackage
