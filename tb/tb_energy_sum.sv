// tb_energy_sum: drives random eight-channel events back to back and checks
// that each sum equals an independently computed total one cycle later.
// How: the sum model is plain integer addition in the testbench; the
// expected sums are queued in input order and compared as outputs appear,
// with events on three cycles out of four (back to back most of the time).
// The sum follows the source design; the stimulus is this design's own.
module tb_energy_sum;
  import spu_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  event_t in_ev, out_ev;
  energy_sum dut (.*);
  int exp_q[$];
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (!rst && out_valid) begin
    checks++;
    if (exp_q.size() == 0 || out_ev.esum != ESUM_W'(exp_q.pop_front())) begin
      failures++; $display("mismatch esum=%0d", out_ev.esum);
    end
  end
  initial begin
    in_ev = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 500; n++) begin
      int s; s = 0;
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      for (int i = 0; i < 8; i++) begin
        in_ev.area[i] = (n < 5) ? 16'hFFFF : 16'($urandom);
        s += int'(in_ev.area[i]);
      end
      if (in_valid) exp_q.push_back(s);
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++; if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
