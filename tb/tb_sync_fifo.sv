// tb_sync_fifo: random pushes and pops on a 16-deep FIFO against a queue
// model; checks order, full/empty flags and the overflow counter.
// How: a reduced depth (16) makes full and overflow frequent; bursts of
// pushes, bursts of pops and mixed phases are driven with $urandom. Timing:
// first-word-fall-through, the head is checked each cycle. The block FIFO
// follows the source design; depth and overflow counting are this design's.
module tb_sync_fifo;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rd_en = 0, full, rd_valid;
  logic [31:0] wr_data = 0, rd_data;
  logic [4:0] level;
  logic [15:0] ovf_cnt;
  sync_fifo #(.W(32), .DEPTH(16)) dut (.*);
  logic [31:0] q[$];
  int lost = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      checks++;
      if (rd_valid != (q.size() != 0) || full != (q.size() == 16) || int'(level) != q.size()) begin
        failures++; $display("flags level=%0d model=%0d", level, q.size());
      end
      if (rd_valid) begin
        checks++;
        if (rd_data != q[0]) begin failures++; $display("data %h exp %h", rd_data, q[0]); end
      end
      wr_en = (n < 2000) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      rd_en = (n < 1000) ? ($urandom % 3 == 0) : ($urandom % 2 == 0);
      wr_data = $urandom;
      begin
        bit acc;
        acc = q.size() < 16;     // a write into a full FIFO is lost even if a pop happens
        if (rd_en && q.size() != 0) void'(q.pop_front());
        if (wr_en) begin
          if (acc) q.push_back(wr_data);
          else lost++;
        end
      end
    end
    @(negedge clk);
    checks++;
    if (int'(ovf_cnt) != lost || lost == 0) begin failures++; $display("ovf %0d exp %0d", ovf_cnt, lost); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
