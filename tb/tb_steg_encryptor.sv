// tb_steg_encryptor: streams samples and cover pixels through the Encryptor with random
// gaps on the input and random back-pressure on the output, and checks every output word
// against the reference model: the three stego pixels (dither offset cycling 0,1,2 per
// pixel, cipher bits in the LSBs) and the KEY word, tlast on the KEY word of the last
// sample of a frame, the paper's +12345 example bit string, the 22-cycle unstalled period
// per sample, and the frame-capacity flag (4x3-pixel frames, 4 samples each).
module tb_steg_encryptor;
  import steg_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = 4, H = 3, SPF = W * H / 3;  // samples per frame

  logic clk = 0, rst_n = 0;
  logic [31:0] s_tdata = '0, m_tdata;
  logic s_tvalid = 0, s_tready, s_tlast = 0;
  logic m_tvalid, m_tready = 0, m_tlast, frame_overflow;
  int checks = 0, failures = 0, cycles = 0;
  bit stall_out = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  steg_encryptor #(.IMG_W(W), .IMG_H(H)) dut (
    .clk, .rst_n,
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .s_axis_tlast(s_tlast),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready),
    .m_axis_tlast(m_tlast), .frame_overflow(frame_overflow));

  typedef struct {logic [31:0] data; logic last;} beat_t;
  beat_t exp_q [$];
  int pix_seen = 0, out_count = 0;

  // output monitor
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

  // random output back-pressure
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

  task automatic send_sample(input int s, input logic last, input bit gaps);
    logic [23:0] cb;
    logic [31:0] p;
    cb = cipher_bits(s);
    send(32'(s), 1'b0, gaps);
    for (int i = 0; i < 3; i++) begin
      p = $urandom;
      if (i == 1 && $urandom_range(0, 3) == 0) p = 32'hFFFE_FDFC;  // saturation corner
      exp_q.push_back('{ref_pix(p, pix_seen % 3, cb[23-8*i -: 8]), 1'b0});
      pix_seen++;
      send(p, (i == 2) ? last : 1'b0, gaps);
    end
    exp_q.push_back('{{8'h00, key_bits(s)}, last});
  endtask

  int t0, t1;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // paper example: +12345 -> 0000 1011 0111 1101 0101 0010
    checks++;
    if (cipher_bits(12345) != 24'b0000_1011_0111_1101_0101_0010) failures++;
    // unstalled period: two samples back to back
    send_sample(12345, 1'b0, 0);
    t0 = cycles;
    send_sample(-32768, 1'b0, 0);
    t1 = cycles;
    checks++;
    if (t1 - t0 != 22) begin
      failures++;
      $display("FAIL period %0d cycles, expected 22", t1 - t0);
    end
    send_sample(32767, 1'b0, 0);
    send_sample(0, 1'b1, 0);
    stall_out = 1;
    for (int f = 0; f < 15; f++)
      for (int j = 0; j < SPF; j++)
        send_sample(int'($signed(16'($urandom))), j == SPF - 1, 1);
    repeat (40) @(negedge clk);
    checks += 2;
    if (frame_overflow) begin
      failures++;
      $display("FAIL frame_overflow set by full frames");
    end
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d outputs missing", exp_q.size());
    end
    // one sample too many in a frame
    for (int j = 0; j < SPF; j++) send_sample(-j * 77, 1'b0, 1);
    repeat (30) @(negedge clk);
    checks++;
    if (frame_overflow) failures++;
    send_sample(4242, 1'b1, 1);
    repeat (40) @(negedge clk);
    checks++;
    if (!frame_overflow) begin
      failures++;
      $display("FAIL frame_overflow not set");
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
