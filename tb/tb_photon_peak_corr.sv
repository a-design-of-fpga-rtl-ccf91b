// tb_photon_peak_corr: writes per-crystal gains, then checks corrected
// energy = min(65535, floor(esum * gain / 2^20)). One crystal's gain is set
// so that its photo peak channel (4000) maps to 511.
// Results are compared in order with a queue of expected values. The per-crystal
// correction to 511 follows the source design; the multiplicative gain
// format (28 bits, 20 fraction bits) is this design's own.
module tb_photon_peak_corr;
  import spu_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  event_t in_ev, out_ev;
  logic cfg_we = 0;
  logic [9:0] cfg_addr = 0;
  logic [27:0] cfg_data = 0;
  photon_peak_corr dut (.*);
  longint lut[529];
  int q[$];
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (!rst && out_valid) begin
    checks++;
    if (q.size() == 0 || int'(out_ev.ecorr) != q.pop_front()) begin
      failures++; $display("ecorr mismatch %0d", out_ev.ecorr);
    end
  end
  initial begin
    in_ev = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 529; i++) begin
      lut[i] = longint'($urandom % (1 << 22));
      if (i == 75) lut[i] = (511 * (longint'(1) << 20) + 3999) / 4000;  // crystal 76
      @(negedge clk) begin cfg_we = 1; cfg_addr = 10'(i); cfg_data = 28'(lut[i]); end
    end
    @(negedge clk) cfg_we = 0;
    for (int n = 0; n < 2000; n++) begin
      int c;
      longint e, v;
      @(negedge clk);
      c = (n < 10) ? 76 : 1 + int'($urandom % 529);
      e = (n < 10) ? 4000 : longint'($urandom % (1 << 19));
      in_valid = 1; in_ev.cid = 10'(c); in_ev.esum = 19'(e);
      v = (e * lut[c-1]) >> 20;
      if (v > 65535) v = 65535;
      if (n < 10 && v != 511) begin failures++; $display("peak not at 511"); end
      q.push_back(int'(v));
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++; if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
