// tb_ip_tx: sends byte-stream datagrams of random length with random
// back-pressure and checks the IPv4 header (version/length, total length,
// incrementing identification, protocol, addresses), that its checksum
// verifies, and that the payload follows unchanged.
// Timing: the 20 header bytes precede the payload with no gap; output
// back-pressure stalls the stream without loss. The header fields are
// standard IPv4; DF, TTL and the counting ID are this design's choices.
module tb_ip_tx;
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
  ip_tx dut (.clk, .rst, .src_ip(32'hC0A80A01), .dst_ip(32'hC0A80AFE), .in_data, .in_valid, .in_last,
    .in_ready, .in_len, .out_data, .out_valid, .out_last, .out_ready, .out_len);
  bq_t exp_q[$], frame;
  int nframes = 0;
  initial frame = {};
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    frame.push_back(out_data);
    if (out_last) begin
      bq_t h, p;
      h = frame[0:19];
      p = frame[20:$];
      checks++;
      if (h[0] != 8'h45 || {h[2], h[3]} != 16'(frame.size()) || {h[4], h[5]} != 16'(nframes)
          || h[9] != 8'd17 || {h[12], h[13], h[14], h[15]} != 32'hC0A80A01
          || {h[16], h[17], h[18], h[19]} != 32'hC0A80AFE || ip_sum(h) != 32'hFFFF
          || out_len != 16'(frame.size())) begin
        failures++; $display("bad IP header");
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
