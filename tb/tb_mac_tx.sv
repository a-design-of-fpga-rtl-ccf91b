// tb_mac_tx: sends byte-stream packets of random length with random
// back-pressure and checks the 14-byte Ethernet header (destination,
// source, EtherType 0x0800) and that the payload follows unchanged.
// How: expected frames are built with tb_net_pkg and compared byte by byte.
// Timing: the header takes 14 cycles, the payload one byte per accepted
// cycle. The header content follows Ethernet II; which part the logic adds
// (versus the MAC core) follows the source design.
module tb_mac_tx;
  import tb_net_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [7:0] in_data = 0, out_data;
  logic in_valid = 0, in_last = 0, in_ready, out_valid, out_last, out_ready = 1;
  logic [15:0] in_len = 0, out_len;
  mac_tx dut (.clk, .rst, .src_mac(48'h020000000001), .dst_mac(48'h0200000000FE), .in_data, .in_valid, .in_last,
    .in_ready, .in_len, .out_data, .out_valid, .out_last, .out_ready);
  bq_t exp_q[$], frame;
  int nframes = 0;
  initial frame = {};
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    frame.push_back(out_data);
    if (out_last) begin
      bq_t h, p;
      h = frame[0:13];
      p = frame[14:$];
      checks++;
      if (h != bq_t'{8'h02, 8'h00, 8'h00, 8'h00, 8'h00, 8'hFE, 8'h02, 8'h00, 8'h00, 8'h00, 8'h00, 8'h01,
                     8'h08, 8'h00}) begin
        failures++; $display("bad MAC header");
      end
      checks++;
      if (exp_q.size() == 0 || p != exp_q.pop_front()) begin failures++; $display("payload"); end
      nframes++;
      frame = {};
    end
  end
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    fork forever begin @(negedge clk); out_ready = ($urandom % 4) != 0; end join_none
    for (int n = 0; n < 40; n++) begin
      bq_t pay;
      pay = {};
      repeat (8 + $urandom % 100) pay.push_back(8'($urandom));
      exp_q.push_back(pay);
      for (int i = 0; i < pay.size(); i++) begin
        @(negedge clk);
        in_valid = 1; in_data = pay[i]; in_last = i == pay.size() - 1; in_len = 16'(pay.size());
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk) begin in_valid = 0; in_last = 0; end
    end
    repeat (200) @(posedge clk);
    checks++; if (nframes != 40) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
