// tb_online_histogram: full-size (512x512 x 10-bit) histogram unit.
//  1. flood run: events from a few positions, one every 4 cycles (the unit's
//     rate), plus one event too soon after another (must be dropped);
//     readout of all 262144 counters is compared with a model.
//  2. overflow: 1023 events to one address set the full flag and end the
//     run; later events are not counted.
//  3. energy run: address = (crystal-1)*256 + (esum >> eshift, clipped);
//     readout of 529*256 counters is compared with a model.
module tb_online_histogram;
  import spu_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  mode_e mode = MODE_FLOOD;
  logic [4:0] eshift = 0;
  logic start = 0, stop = 0, readout = 0, ev_valid = 0, pkg_ready = 1;
  event_t ev;
  logic [3:0] mod_id = 4'd5;
  logic [1:0] blk_id = 2'd1;
  logic pkg_valid, running, busy, full;
  logic [127:0] pkg;
  logic [15:0] drop_cnt;
  online_histogram dut (.*);

  int model[int];
  int npkg, next_addr, bad_cnt;
  bit  collecting = 0;
  logic [3:0] exp_type;

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (4000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    if (collecting && pkg_valid && pkg_ready) begin
      int a;
      a = int'(pkg[117:100]);
      if (a != next_addr || pkg[127:124] != exp_type || pkg[123:120] != 4'd5 || pkg[119:118] != 2'd1)
        bad_cnt++;
      for (int i = 0; i < 8; i++) begin
        int e;
        e = model.exists(a + i) ? model[a + i] : 0;
        if (int'(pkg[i*10 +: 10]) != e) begin
          bad_cnt++;
          if (bad_cnt < 5) $display("addr %0d count %0d exp %0d", a + i, pkg[i*10 +: 10], e);
        end
      end
      next_addr += 8;
      npkg++;
    end
  end

  task automatic pulse(ref logic s);
    @(negedge clk) s = 1;
    @(negedge clk) s = 0;
  endtask

  task automatic send(int x, int y, int cid, int esum, int gap);
    @(negedge clk);
    ev_valid = 1; ev.x = 9'(x); ev.y = 9'(y); ev.cid = 10'(cid); ev.esum = 19'(esum);
    @(negedge clk) ev_valid = 0;
    repeat (gap - 1) @(negedge clk);
  endtask

  task automatic do_readout(int total);
    npkg = 0; next_addr = 0; bad_cnt = 0; collecting = 1;
    pulse(readout);
    while (busy) begin
      @(negedge clk);
      pkg_ready = ($urandom % 4) != 0;
    end
    pkg_ready = 1;
    collecting = 0;
    chk(npkg == total / 8, "package count");
    chk(bad_cnt == 0, "readout contents");
  endtask

  initial begin
    int cyc0;
    ev = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // ---- 1. flood run ----
    pulse(start);
    wait (running);
    chk(!full, "full cleared");
    for (int n = 0; n < 400; n++) begin
      int x, y;
      x = 100 + 37 * (n % 5); y = (50 + 91 * (n % 7)) % 512;
      model[y * 512 + x] = model.exists(y * 512 + x) ? model[y * 512 + x] + 1 : 1;
      send(x, y, 1, 0, 4);
    end
    send(3, 3, 1, 0, 1);                 // accepted
    send(4, 4, 1, 0, 4);                 // arrives one cycle later: dropped
    model[3 * 512 + 3] = 1;
    chk(drop_cnt == 16'd1, "one event dropped");
    pulse(stop);
    @(negedge clk);
    chk(!busy, "stopped");
    exp_type = PT_FLOOD_HIST;
    do_readout(262144);
    // ---- 2. overflow ----
    model.delete();
    pulse(start);
    wait (running);
    for (int n = 0; n < 1022; n++) send(7, 9, 1, 0, 4);
    chk(!full && running, "1022 counts: not full");
    send(7, 9, 1, 0, 4);
    chk(full && !running, "1023 counts: full and stopped");
    send(7, 9, 1, 0, 4);
    send(8, 9, 1, 0, 4);
    model[9 * 512 + 7] = 1023;
    do_readout(262144);
    // ---- 3. energy run ----
    model.delete();
    mode = MODE_ENERGY;
    eshift = 5'd4;
    pulse(start);
    wait (running);
    for (int n = 0; n < 300; n++) begin
      int c, e, bin;
      c = 1 + int'($urandom % 529);
      e = (n % 10 == 0) ? 19'h7FFFF : int'($urandom % 4096);
      bin = e >> 4; if (bin > 255) bin = 255;
      model[(c - 1) * 256 + bin] = model.exists((c - 1) * 256 + bin) ? model[(c - 1) * 256 + bin] + 1 : 1;
      send(0, 0, c, e, 5);
    end
    pulse(stop);
    exp_type = PT_ENERGY_HIST;
    cyc0 = 0;
    do_readout(529 * 256);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
