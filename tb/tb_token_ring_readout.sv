// tb_token_ring_readout: four source queues with random fill; checks that
// every word comes out once and in per-source order, that a holder never
// sends more than MAX_BURST in a row, that a suddenly busy source gets
// served while others are idle, and that the token moves on empty holders.
module tb_token_ring_readout;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic [3:0] in_valid, in_rd;
  logic [3:0][15:0] in_data;
  logic out_valid, out_ready = 1, token_pass;
  logic [15:0] out_data;
  logic [1:0] out_src;
  token_ring_readout #(.N(4), .W(16), .MAX_BURST(4)) dut (.*);
  logic [15:0] src_q[4][$];
  int run = 0, last_src = -1, passes = 0, got = 0, sent = 0, seq[4];
  always_comb for (int i = 0; i < 4; i++) begin
    in_valid[i] = src_q[i].size() != 0;
    in_data[i]  = in_valid[i] ? src_q[i][0] : 16'h0;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (!rst) begin
    if (token_pass) passes++;
    if (out_valid && out_ready) begin
      checks++;
      got++;
      if (out_data[15:14] != out_src) begin failures++; $display("wrong source"); end
      if (int'(out_src) == last_src) run++; else run = 1;
      last_src = int'(out_src);
      checks++;
      if (run > 4) begin failures++; $display("burst too long"); end
      void'(src_q[out_src].pop_front());
    end
    if (!out_valid) run = 0;
  end
  initial begin
    for (int i = 0; i < 4; i++) seq[i] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      out_ready = ($urandom % 5) != 0;
      for (int i = 0; i < 4; i++)
        if ((n < 2000 && $urandom % 6 == 0) || (n >= 2000 && n < 2050 && i == 3)) begin
          src_q[i].push_back({2'(i), 14'(seq[i])});
          seq[i]++; sent++;
        end
    end
    out_ready = 1;
    repeat (500) @(posedge clk);
    checks += 2;
    if (got != sent) begin failures++; $display("got %0d sent %0d", got, sent); end
    if (passes < 100) begin failures++; $display("token passed %0d", passes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // per-source order
  int expn[4] = '{0, 0, 0, 0};
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    checks++;
    if (int'(out_data[13:0]) != expn[out_src]) begin failures++; $display("order"); end
    expn[out_src]++;
  end
endmodule
