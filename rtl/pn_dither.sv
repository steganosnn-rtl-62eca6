// pn_dither: pseudo-noise offset source for the dithering stage.
//
// Before the two LSBs of a pixel are overwritten, a small bounded offset is added to
// every channel so that the substitution does not leave flat quantisation steps. The
// paper's hardware uses a cyclic offset in the range 0..2; here it is a counter that
// runs 0, 1, ..., DITHER_MAX, 0, ... and advances by one each time step is high (once
// per embedded pixel). Starting at 0 after reset and applying the same offset to all
// four channels of a pixel are this design's choices.
//
// Interface and timing: offset is the registered current value; it changes on the
// clock edge at which step is high.
module pn_dither #(
  parameter int DITHER_MAX = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       step,
  output logic [1:0] offset
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      offset <= '0;
    else if (step)
      offset <= (offset == 2'(DITHER_MAX)) ? 2'd0 : offset + 2'd1;
  end

  initial assert (DITHER_MAX >= 0 && DITHER_MAX <= 3)
    else $error("pn_dither: DITHER_MAX must fit in two bits");

endmodule
