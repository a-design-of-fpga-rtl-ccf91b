// tb_time_offset_corr: writes random per-crystal offsets, then checks that
// each event's corrected time equals TDC + offset of its crystal, with a
// latency of two cycles.
// How: the expected value is computed in the testbench from its own copy of
// the offsets; events arrive every cycle with random crystal IDs. The
// correction follows the source design; the 32-bit widths are this
// design's own.
module tb_time_offset_corr;
  import spu_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  event_t in_ev, out_ev;
  logic cfg_we = 0;
  logic [9:0] cfg_addr = 0;
  logic [31:0] cfg_data = 0;
  time_offset_corr dut (.*);
  logic [31:0] lut[529];
  logic [31:0] q[$];
  int tq[$];
  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (!rst && out_valid) begin
    checks++;
    if (q.size() == 0 || out_ev.tcorr != q.pop_front() || cyc - tq.pop_front() - 1 != 2) begin
      failures++; $display("tcorr mismatch %h", out_ev.tcorr);
    end
  end
  initial begin
    in_ev = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 529; i++) begin
      lut[i] = $urandom;
      @(negedge clk) begin cfg_we = 1; cfg_addr = 10'(i); cfg_data = lut[i]; end
    end
    @(negedge clk) cfg_we = 0;
    for (int n = 0; n < 2000; n++) begin
      int c;
      @(negedge clk);
      c = 1 + int'($urandom % 529);
      in_valid = 1; in_ev.cid = 10'(c); in_ev.tdc = $urandom;
      q.push_back(in_ev.tdc + lut[c-1]);
      tq.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++; if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
