// tb_boundary_clt: loads both boundary tables through the configuration
// port, then checks the crystal ID of random positions against a count of
// boundaries computed in the testbench, plus the worked example of the
// boundary-table description: (x,y) = (11,7) with x-boundaries {8,14,20}
// on line y=7 and y-boundaries {7,11,20} on column x=11 gives crystal 25.
// Results are compared in order with a queue of expected IDs. The
// boundary tables and the counting rule follow the source design; the
// configuration port is this design's own.
module tb_boundary_clt;
  import spu_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  event_t in_ev, out_ev;
  logic cfg_we = 0, cfg_sel = 0;
  logic [8:0] cfg_row = 0, cfg_data = 0;
  logic [4:0] cfg_idx = 0;
  boundary_clt dut (.*);
  int xb[512][22], yb[512][22];
  int q[$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (!rst && out_valid) begin
    checks++;
    if (q.size() == 0 || out_ev.cid != CID_W'(q.pop_front())) begin
      failures++; $display("cid mismatch %0d", out_ev.cid);
    end
  end
  task automatic wr(bit sel, int row, int idx, int v);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_row = 9'(row); cfg_idx = 5'(idx); cfg_data = 9'(v);
    @(negedge clk) cfg_we = 0;
  endtask
  initial begin
    in_ev = '0;
    for (int r = 0; r < 512; r++)
      for (int i = 0; i < 22; i++) begin
        xb[r][i] = 22 * (i + 1) + (r % 5);
        yb[r][i] = 22 * (i + 1) + (r % 4);
      end
    xb[7][0] = 8;  xb[7][1] = 14; xb[7][2] = 20;
    yb[11][0] = 7; yb[11][1] = 11; yb[11][2] = 20;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int r = 0; r < 512; r++)
      for (int i = 0; i < 22; i++) begin
        wr(0, r, i, xb[r][i]);
        wr(1, r, i, yb[r][i]);
      end
    for (int n = 0; n < 3000; n++) begin
      int x, y, nx, ny;
      @(negedge clk);
      x = (n == 0) ? 11 : int'($urandom % 512);
      y = (n == 0) ? 7  : int'($urandom % 512);
      in_valid = 1;
      in_ev.x = 9'(x); in_ev.y = 9'(y);
      nx = 0; ny = 0;
      for (int i = 0; i < 22; i++) begin
        if (xb[y][i] <= x) nx++;
        if (yb[x][i] <= y) ny++;
      end
      if (n == 0 && ny * 23 + nx + 1 != 25) begin failures++; $display("example wrong"); end
      q.push_back(ny * 23 + nx + 1);
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++; if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
