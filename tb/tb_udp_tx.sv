// tb_udp_tx: feeds 16-byte packages (some gaps long enough to force fill
// packages) and checks each datagram: UDP header (ports, length 136,
// checksum 0), package bytes in order and most significant byte first,
// fill packages where no package was waiting, and the rate: with packages
// waiting and the sink always ready a datagram takes 136 consecutive cycles.
module tb_udp_tx;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic pkg_valid = 0, pkg_ready, out_valid, out_last, out_ready = 1, fill_sent;
  logic [127:0] pkg = 0;
  logic [7:0] out_data;
  logic [15:0] out_len;
  udp_tx #(.PKGS_PER_DGRAM(8), .FLUSH_WAIT(64)) dut (.clk, .rst, .src_port(16'd5000),
    .dst_port(16'd6000), .pkg_valid, .pkg, .pkg_ready, .out_data, .out_valid, .out_last,
    .out_ready, .out_len, .fill_sent);
  logic [127:0] sent_q[$];
  byte unsigned frame[$];
  int fills = 0, pkgs_seen = 0, first_cyc, cyc = 0, dgrams = 0, fast_dgrams = 0;
  bit stall_phase = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (!rst) begin
    if (fill_sent) fills++;
    if (out_valid && out_ready) begin
      if (frame.size() == 0) first_cyc = cyc;
      frame.push_back(out_data);
      if (out_last) begin
        dgrams++;
        checks++;
        if (frame.size() != 136 || {frame[0], frame[1]} != 16'd5000 || {frame[2], frame[3]} != 16'd6000
            || {frame[4], frame[5]} != 16'd136 || {frame[6], frame[7]} != 16'd0 || out_len != 16'd136) begin
          failures++; $display("bad UDP header/length");
        end
        for (int p = 0; p < 8; p++) begin
          logic [127:0] got;
          for (int b = 0; b < 16; b++) got[127 - 8*b -: 8] = frame[8 + 16*p + b];
          checks++;
          if (got[127:124] == 4'd0) begin
            if (got != '0) begin failures++; $display("bad fill"); end
          end else if (sent_q.size() == 0 || got != sent_q.pop_front()) begin
            failures++; $display("package mismatch");
          end else pkgs_seen++;
        end
        if (!stall_phase && cyc - first_cyc == 135) fast_dgrams++;
        frame = {};
      end
    end
  end
  task automatic give(logic [127:0] p);
    @(negedge clk);
    pkg_valid = 1; pkg = p;
    do @(posedge clk); while (!pkg_ready);
    sent_q.push_back(p);
    @(negedge clk) pkg_valid = 0;
  endtask
  initial begin
    int nsent;
    nsent = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // phase 1: packages always waiting, sink always ready
    fork
      for (int n = 0; n < 64; n++) begin
        @(negedge clk);
        pkg_valid = 1; pkg = {4'd1, 124'({$urandom, $urandom, $urandom, $urandom})};
        @(posedge clk);
        while (!pkg_ready) @(posedge clk);
        sent_q.push_back(pkg);
        nsent++;
      end
    join
    @(negedge clk) pkg_valid = 0;
    wait (sent_q.size() == 0);
    repeat (200) @(posedge clk);
    // phase 2: sparse packages and back-pressure
    stall_phase = 1;
    fork
      forever begin @(negedge clk); out_ready = ($urandom % 3) != 0; end
    join_none
    for (int n = 0; n < 20; n++) begin
      give({4'd2, 124'({$urandom, $urandom, $urandom, $urandom})});
      nsent++;
      repeat ($urandom % 150) @(negedge clk);
    end
    repeat (3000) @(posedge clk);
    chk(pkgs_seen == nsent, "every package delivered");
    chk(fills > 0, "fill packages used");
    chk(fast_dgrams == 8, "full-rate datagrams take 136 cycles");
    $display("dgrams=%0d fills=%0d fast=%0d", dgrams, fills, fast_dgrams);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
