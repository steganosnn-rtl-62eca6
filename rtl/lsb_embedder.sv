// lsb_embedder: dithers one RGBA pixel and hides 8 bits in its channel LSBs.
//
// Each 8-bit channel first gets the dither offset added, saturating at 255, and then
// its two least significant bits are replaced by two payload bits: R takes
// payload[7:6], G payload[5:4], B payload[3:2] and A payload[1:0], so that a 24-bit
// cipher string read most significant bit first fills R, G, B, A of the first pixel,
// then of the second and third. The dither-then-replace order and the channel order
// follow the paper; saturation at 255 is this design's choice. (One row of the paper's
// worked example, B = 76 with LSBs 10, prints 74; bit replacement gives 78, and this
// module gives 78.)
//
// Interface: combinational, one pixel in, one pixel out.
module lsb_embedder
  import steg_pkg::*;
(
  input  rgba_t      pix_in,
  input  logic [1:0] offset,
  input  logic [7:0] payload,
  output rgba_t      pix_out
);

  function automatic logic [7:0] embed_ch(input logic [7:0] c, input logic [1:0] off,
                                          input logic [1:0] bits);
    logic [8:0] sum;
    logic [5:0] upper;
    sum   = {1'b0, c} + {7'd0, off};
    upper = sum[8] ? 6'h3F : sum[7:2];  // saturate at 255
    return {upper, bits};
  endfunction

  always_comb begin
    pix_out.r = embed_ch(pix_in.r, offset, payload[7:6]);
    pix_out.g = embed_ch(pix_in.g, offset, payload[5:4]);
    pix_out.b = embed_ch(pix_in.b, offset, payload[3:2]);
    pix_out.a = embed_ch(pix_in.a, offset, payload[1:0]);
  end

endmodule
