// tb_cog_position: feeds random and corner-case area sets at one event per
// cycle and checks raw x, y (9 bits) and DOI (4 bits) against the
// centre-of-gravity formulas evaluated with integer arithmetic, and the
// 11-cycle latency.
// The formulas and output widths follow the source design; the fixed-point
// scaling checked here (floor(512 f), averaged, saturating) is this
// design's own.
module tb_cog_position;
  import spu_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  event_t in_ev, out_ev;
  cog_position dut (.*);
  typedef struct { int x; int y; int doi; int t; } exp_t;
  exp_t q[$];
  int cyc = 0;
  always @(posedge clk) cyc++;

  function automatic int frac(longint n, longint d, int bits);
    longint v;
    if (d == 0) return (1 << bits) - 1;
    v = (n << bits) / d;
    return (v > (1 << bits) - 1) ? (1 << bits) - 1 : int'(v);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (!rst && out_valid) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = q.pop_front();
      if (out_ev.x != COORD_W'(e.x) || out_ev.y != COORD_W'(e.y) || out_ev.doi != DOI_W'(e.doi)
          || cyc - e.t - 1 != 11) begin
        failures++;
        $display("got x=%0d y=%0d doi=%0d lat=%0d exp %0d %0d %0d", out_ev.x, out_ev.y, out_ev.doi,
                 cyc - e.t, e.x, e.y, e.doi);
      end
    end
  end
  initial begin
    in_ev = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 2000; n++) begin
      longint a[8], s1, s2;
      exp_t e;
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      for (int i = 0; i < 8; i++) begin
        a[i] = (n % 7 == 0) ? longint'($urandom % 50) : longint'($urandom % 65536);
        if (n == 10) a[i] = (i == 0 || i == 4) ? 1000 : 0;   // corner: all light on A
        in_ev.area[i] = 16'(a[i]);
      end
      s1 = a[0] + a[1] + a[2] + a[3];
      s2 = a[4] + a[5] + a[6] + a[7];
      e.x   = (frac(a[0] + a[3], s1, 9) + frac(a[4] + a[7], s2, 9)) / 2;
      e.y   = (frac(a[0] + a[1], s1, 9) + frac(a[6] + a[7], s2, 9)) / 2;
      e.doi = frac(s1, s1 + s2, 4);
      e.t   = cyc;
      if (in_valid) q.push_back(e);
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(posedge clk);
    checks++; if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
