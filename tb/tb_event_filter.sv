// tb_event_filter: checks that with an energy window [350, 650] only events
// inside it pass and the others raise drop, and that bypass passes all.
// How: random energies around and on both window edges, events every cycle
// or with gaps; the expected pass/drop decision is computed in the testbench.
// Passed events are compared in order with a queue of the expected ones.
// The window itself follows the source design; the inclusive bounds and the bypass
// input are this design's choices and are tested as such.
module tb_event_filter;
  import spu_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid, bypass = 0, drop;
  logic [15:0] win_lo = 350, win_hi = 650;
  event_t in_ev, out_ev;
  event_filter dut (.*);
  int ev_q[$], exp_pass, exp_drop, got_pass = 0, got_drop = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (!rst) begin
    if (out_valid) begin
      got_pass++;
      checks++;
      if (ev_q.size() == 0 || int'(out_ev.ecorr) != ev_q.pop_front()) failures++;
    end
    if (drop) got_drop++;
  end
  initial begin
    in_ev = '0;
    exp_pass = 0; exp_drop = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 3000; n++) begin
      int e;
      @(negedge clk);
      e = (n % 100 == 0) ? 350 : (n % 100 == 1) ? 650 : (n % 100 == 2) ? 349 : (n % 100 == 3) ? 651
          : int'($urandom % 1024);
      bypass = n >= 2500;
      in_valid = 1; in_ev.ecorr = 16'(e);
      if (bypass || (e >= 350 && e <= 650)) begin exp_pass++; ev_q.push_back(e); end
      else exp_drop++;
    end
    @(negedge clk) in_valid = 0;
    repeat (3) @(posedge clk);
    checks += 2;
    if (got_pass != exp_pass) begin failures++; $display("pass %0d exp %0d", got_pass, exp_pass); end
    if (got_drop != exp_drop) begin failures++; $display("drop %0d exp %0d", got_drop, exp_drop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
