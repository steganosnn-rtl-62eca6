// tb_steg_decryptor: builds stego groups with the reference model (random upper pixel
// bits, cipher bits in the LSBs, KEY word) for the extreme samples, the paper's example
// and random samples, streams them with random gaps and back-pressure, and checks each
// recovered sample, its tlast, the 5-cycle unstalled period, that decode_error stays low
// for valid data, and that a corrupted KEY word sets it.
module tb_steg_decryptor;
  import steg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [31:0] s_tdata = '0, m_tdata;
  logic s_tvalid = 0, s_tready, s_tlast = 0;
  logic m_tvalid, m_tready = 0, m_tlast, decode_error;
  int checks = 0, failures = 0, cycles = 0, out_count = 0;
  bit stall_out = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  steg_decryptor dut (
    .clk, .rst_n,
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .s_axis_tlast(s_tlast),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready),
    .m_axis_tlast(m_tlast), .decode_error(decode_error));

  typedef struct {logic [31:0] data; logic last;} beat_t;
  beat_t exp_q [$];

  always @(posedge clk) begin
    if (m_tvalid && m_tready) begin
      beat_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output %h", m_tdata);
      end else begin
        e = exp_q.pop_front();
        if (m_tdata !== e.data || m_tlast !== e.last) begin
          failures++;
          $display("FAIL out %0d: %h last %0b expected %h last %0b", out_count, m_tdata, m_tlast,
                   e.data, e.last);
        end
      end
      out_count++;
    end
  end

  always @(negedge clk) m_tready <= stall_out ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic send(input logic [31:0] d, input logic last, input bit gaps);
    @(negedge clk);
    if (gaps)
      while ($urandom_range(0, 3) == 0) @(negedge clk);
    s_tdata  = d;
    s_tlast  = last;
    s_tvalid = 1;
    #1;
    while (!s_tready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1;
    s_tvalid = 0;
    s_tlast  = 0;
  endtask

  task automatic send_group(input int s, input logic last, input bit gaps,
                            input logic [23:0] key_xor = '0, input bit expect_out = 1);
    logic [23:0] cb;
    cb = cipher_bits(s);
    for (int i = 0; i < 3; i++) begin
      logic [31:0] p;
      p = $urandom;
      p = {p[31:26], cb[23-8*i -: 2], p[23:18], cb[21-8*i -: 2],
           p[15:10], cb[19-8*i -: 2], p[7:2], cb[17-8*i -: 2]};
      send(p, 1'b0, gaps);
    end
    if (expect_out) exp_q.push_back('{32'(s), last});
    send({8'h00, key_bits(s) ^ key_xor}, last, gaps);
  endtask

  int t0, t1;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    send_group(12345, 1'b0, 0);
    t0 = cycles;
    send_group(-32768, 1'b0, 0);
    t1 = cycles;
    checks++;
    if (t1 - t0 != 5) begin
      failures++;
      $display("FAIL period %0d, expected 5", t1 - t0);
    end
    send_group(32767, 1'b0, 0);
    send_group(0, 1'b1, 0);
    send_group(-1, 1'b0, 0);
    stall_out = 1;
    for (int i = 0; i < 600; i++)
      send_group(int'($signed(16'($urandom))), ($urandom_range(0, 9) == 0), 1);
    repeat (20) @(negedge clk);
    checks += 2;
    if (decode_error) begin
      failures++;
      $display("FAIL decode_error on valid data");
    end
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d outputs missing", exp_q.size());
    end
    // KEY of digit 5 (cipher 2, KEY 3) changed to 2: no digit matches
    // (the units digit then decodes as 0, so the sample comes out as 0)
    stall_out = 0;
    exp_q.push_back('{32'd0, 1'b0});
    send_group(5, 1'b0, 0, 24'h000001, 0);
    repeat (10) @(negedge clk);
    checks++;
    if (!decode_error) begin
      failures++;
      $display("FAIL decode_error not set");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
