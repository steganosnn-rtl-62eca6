// tb_lsb_embedder: the published one-pixel example (R 150, G 200, B 75, A 253, noise +1,
// LSBs 00 00 10 11), then saturation corners and 2000 random pixels against the
// reference model. In the example the B channel must give 78: 76 with its two LSBs set
// to 10.
module tb_lsb_embedder;
  import steg_pkg::*;
  import tb_ref_pkg::*;

  rgba_t      pix_in, pix_out;
  logic [1:0] offset;
  logic [7:0] payload;
  int checks = 0, failures = 0;

  lsb_embedder dut (.pix_in, .offset, .payload, .pix_out);

  task automatic check(input logic [31:0] p, input int off, input logic [7:0] bits);
    logic [31:0] exp_p;
    pix_in  = rgba_t'(p);
    offset  = 2'(off);
    payload = bits;
    #1;
    exp_p = ref_pix(p, off, bits);
    checks++;
    if (pix_out !== rgba_t'(exp_p)) begin
      failures++;
      $display("FAIL pix %h off %0d bits %b -> %h expected %h", p, off, bits, pix_out, exp_p);
    end
  endtask

  initial begin
    check({8'd150, 8'd200, 8'd75, 8'd253}, 1, 8'b00_00_10_11);
    checks += 4;
    if (pix_out.r != 8'd148) failures++;
    if (pix_out.g != 8'd200) failures++;
    if (pix_out.b != 8'd78)  failures++;
    if (pix_out.a != 8'd255) failures++;
    check(32'hFFFF_FFFF, 2, 8'h00);
    check(32'hFEFD_FCFB, 2, 8'h1B);
    check(32'h0000_0000, 0, 8'hFF);
    for (int i = 0; i < 2000; i++) check($urandom, $urandom_range(0, 2), 8'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
