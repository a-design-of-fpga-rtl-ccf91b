// tb_ip_rx: sends good and bad frames through ip_rx (with random idle gaps)
// and checks that exactly the payloads of the good frames come out, each
// ending with out_last, and that bad frames are flagged.
// Bad packets: wrong destination address or corrupted header checksum;
// Ethernet padding after good packets must be trimmed.
// Frames are built with tb_net_pkg, independently of the RTL. The checks
// made are this design's choice within the source design's reduced stack.
module tb_ip_rx;
  import tb_net_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [7:0] in_data = 0, out_data;
  logic in_valid = 0, in_last = 0, out_valid, out_last, frame_bad;
  ip_rx dut (.clk, .rst, .my_ip(32'hC0A80A01), .in_data, .in_valid, .in_last, .out_data, .out_valid, .out_last, .frame_bad);
  bq_t exp_q[$], cur;
  int nbad = 0;
  initial cur = {};
  always @(posedge clk) if (!rst) begin
    if (frame_bad) nbad++;
    if (out_valid) begin
      cur.push_back(out_data);
      if (out_last) begin
        checks++;
        if (exp_q.size() == 0 || cur != exp_q[0]) begin
          failures++; $display("payload mismatch, %0d bytes", cur.size());
        end
        if (exp_q.size() != 0) void'(exp_q.pop_front());
        cur = {};
      end
    end
  end
  task automatic drive(bq_t f);
    for (int i = 0; i < f.size(); i++) begin
      @(negedge clk);
      while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_data = f[i]; in_last = (i == f.size() - 1);
    end
    @(negedge clk) begin in_valid = 0; in_last = 0; end
  endtask
  initial begin
    int nb;
    nb = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 60; n++) begin
      bq_t pay, f;
      bit good;
      int kind;
      pay = {};
      repeat (1 + $urandom % 40) pay.push_back(8'($urandom));
      kind = n % 4;
      good = kind != 3;
      f = ip_hdr(32'hC0A80AFE, (n % 8 == 3) ? 32'hC0A80A02 : 32'hC0A80A01, pay, n % 8 == 7);
      if (kind == 1) repeat ($urandom % 20) f.push_back(8'hEE);     // trailing padding is trimmed
      if (good) exp_q.push_back(pay); else nb++;
      drive(f);
    end
    repeat (20) @(posedge clk);
    chk(exp_q.size() == 0, "all good payloads delivered");
    chk(nbad == nb, "bad frames flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
