// tb_event_packager: sends events in each mode and sub-mode and checks that
// exactly the right output fires, with type, module ID, block ID and the
// event fields at their documented bit positions.
// How: expected packages are built field by field in the testbench (not
// with the package functions of the RTL), one cycle after each input.
// Marking type, module and block follows the source design; the
// bit layout is this design's own.
module tb_event_packager;
  import spu_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, online = 0;
  event_t in_ev, hist_ev;
  mode_e mode = MODE_REGULAR;
  logic [3:0] mod_id = 4'd9;
  logic [1:0] blk_id = 2'd2;
  logic reg_valid, flood_valid, energy_valid, hist_valid;
  logic [127:0] reg_pkg, flood_pkg, energy_pkg;
  event_packager dut (.*);
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in_ev = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 200; n++) begin
      int m; bit on;
      m = n % 3; on = n[2];
      @(negedge clk);
      mode = mode_e'(m); online = on;
      in_valid = 1;
      in_ev.cid = 10'($urandom % 529 + 1); in_ev.doi = 4'($urandom); in_ev.ecorr = 16'($urandom);
      in_ev.tcorr = $urandom; in_ev.x = 9'($urandom); in_ev.y = 9'($urandom); in_ev.esum = 19'($urandom);
      @(negedge clk);
      in_valid = 0;
      chk(reg_valid == (m == 0), "reg_valid");
      chk(flood_valid == (m == 1 && !on), "flood_valid");
      chk(energy_valid == (m == 2 && !on), "energy_valid");
      chk(hist_valid == (m != 0 && on), "hist_valid");
      if (m == 0) begin
        chk(reg_pkg[127:124] == 4'd1 && reg_pkg[123:120] == 4'd9 && reg_pkg[119:118] == 2'd2, "reg head");
        chk(reg_pkg[117:108] == in_ev.cid && reg_pkg[107:104] == in_ev.doi &&
            reg_pkg[103:88] == in_ev.ecorr && reg_pkg[87:56] == in_ev.tcorr, "reg fields");
      end
      if (m == 1 && !on) chk(flood_pkg[127:124] == 4'd2 && flood_pkg[117:109] == in_ev.x &&
                             flood_pkg[108:100] == in_ev.y && flood_pkg[95:77] == in_ev.esum, "flood");
      if (m == 2 && !on) chk(energy_pkg[127:124] == 4'd3 && energy_pkg[117:108] == in_ev.cid &&
                             energy_pkg[107:89] == in_ev.esum && energy_pkg[119:118] == 2'd2, "energy");
      if (m != 0 && on) chk(hist_ev.x == in_ev.x && hist_ev.cid == in_ev.cid, "hist ev");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
