// tb_block_proc: one detector block at full size. Loads boundary tables
// (a regular 22-pixel grid with a per-line shift), time offsets and gains
// through the configuration port, then runs
//   regular mode: random events; packages checked field by field against a
//                 model of the formulas, including energy-window drops and
//                 the 21-cycle latency from event to FIFO output
//   flood offline / energy offline: raw packages checked
//   flood online: histogram run, stop, readout; counts must add up
module tb_block_proc;
  import spu_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic ev_valid = 0;
  logic [7:0][15:0] area;
  logic [31:0] tdc;
  mode_e mode = MODE_REGULAR;
  logic online = 0, cfg_we = 0, hist_start = 0, hist_stop = 0, hist_read = 0;
  logic [15:0] win_lo = 16'd350, win_hi = 16'd650;
  logic [4:0] eshift = 0;
  cfg_target_e cfg_target = CFG_CLT_XB;
  logic [21:0] cfg_addr = 0;
  logic [31:0] cfg_data = 0;
  logic [2:0] rd_valid, rd_en;
  logic [2:0][127:0] rd_data;
  logic hist_full, hist_busy, filter_drop;
  logic [2:0][15:0] fifo_ovf;
  block_proc #(.BLK_ID(2'd3)) dut (.clk, .rst, .ev_valid, .area, .tdc, .mode, .online,
    .mod_id(4'd6), .win_lo, .win_hi, .eshift, .cfg_we, .cfg_target, .cfg_addr, .cfg_data,
    .hist_start, .hist_stop, .hist_read, .rd_valid, .rd_data, .rd_en, .hist_full, .hist_busy,
    .filter_drop, .fifo_ovf);

  int cyc = 0;
  always @(posedge clk) cyc++;

  function automatic int frac(longint n, longint d, int bits);
    longint v;
    if (d == 0) return (1 << bits) - 1;
    v = (n << bits) / d;
    return (v > (1 << bits) - 1) ? (1 << bits) - 1 : int'(v);
  endfunction
  function automatic int bnd(int line, int i); return 22 * (i + 1) + (line % 3); endfunction
  function automatic int toff(int c); return c * 1000 - 7; endfunction
  function automatic longint gain(int c); return (longint'(1) << 20) / 28 + c * 8; endfunction

  logic [127:0] exp_q[3][$];
  int drops_exp = 0, drops = 0, lat = -1, hist_sum, npk;
  int t_in[$];
  always @(posedge clk) if (!rst && filter_drop) drops++;

  // FIFO readers: compare with the expected queues
  always @(negedge clk) rd_en = rd_valid & 3'($urandom);
  always @(posedge clk) if (!rst) for (int k = 0; k < 3; k++) if (rd_valid[k] && rd_en[k]) begin
    if (k == 1 && online) begin
      npk++;
      for (int i = 0; i < 8; i++) hist_sum += int'(rd_data[k][i*10 +: 10]);
      if (rd_data[k][127:124] != PT_FLOOD_HIST) failures++;
    end else begin
      checks++;
      if (exp_q[k].size() == 0 || rd_data[k] != exp_q[k].pop_front()) begin
        failures++; $display("package mismatch on FIFO %0d: %h", k, rd_data[k]);
      end
    end
  end
  always @(posedge clk) if (!rst && rd_valid[0] && lat < 0) begin
    lat = cyc - t_in[0] - 1;
    $display("first regular package at %0d, event at %0d", cyc, t_in[0]);
  end

  task automatic cfg(cfg_target_e t, int a, int d);
    @(negedge clk) begin cfg_we = 1; cfg_target = t; cfg_addr = 22'(a); cfg_data = d; end
    @(negedge clk) cfg_we = 0;
  endtask

  task automatic event_in(int m);
    longint a[8], s1, s2, e, ec;
    int x, y, doi, nx, ny, cid;
    event_t ev;
    @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      a[i] = (t_in.size() == 0) ? 1700 : 200 + longint'($urandom % 3000);  // first event in window
      area[i] = 16'(a[i]);
    end
    tdc = $urandom;
    ev_valid = 1;
    if (t_in.size() == 0) t_in.push_back(cyc);
    s1 = a[0] + a[1] + a[2] + a[3];
    s2 = a[4] + a[5] + a[6] + a[7];
    e = s1 + s2;
    x = (frac(a[0] + a[3], s1, 9) + frac(a[4] + a[7], s2, 9)) / 2;
    y = (frac(a[0] + a[1], s1, 9) + frac(a[6] + a[7], s2, 9)) / 2;
    doi = frac(s1, e, 4);
    nx = 0; ny = 0;
    for (int i = 0; i < 22; i++) begin
      if (bnd(y, i) <= x) nx++;
      if (bnd(x, i) <= y) ny++;
    end
    cid = ny * 23 + nx + 1;
    ec = (e * gain(cid - 1)) >> 20;
    if (ec > 65535) ec = 65535;
    ev = '0;
    ev.x = 9'(x); ev.y = 9'(y); ev.doi = 4'(doi); ev.cid = 10'(cid); ev.esum = 19'(e);
    ev.tcorr = tdc + 32'(toff(cid - 1)); ev.ecorr = 16'(ec);
    if (m == 0) begin
      if (ec >= 350 && ec <= 650) exp_q[0].push_back(make_regular(4'd6, 2'd3, ev));
      else drops_exp++;
    end else if (m == 1) exp_q[1].push_back(make_flood_raw(4'd6, 2'd3, ev));
    else exp_q[2].push_back(make_energy_raw(4'd6, 2'd3, ev));
    @(negedge clk) ev_valid = 0;
    repeat ($urandom % 6) @(negedge clk);
  endtask

  initial begin
    area = '0; tdc = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int r = 0; r < 512; r++)
      for (int i = 0; i < 22; i++) begin
        cfg(CFG_CLT_XB, r * 32 + i, bnd(r, i));
        cfg(CFG_CLT_YB, r * 32 + i, bnd(r, i));
      end
    for (int c = 0; c < 529; c++) begin
      cfg(CFG_TOFF, c, toff(c));
      cfg(CFG_GAIN, c, int'(gain(c)));
    end
    // regular mode
    for (int n = 0; n < 400; n++) event_in(0);
    repeat (100) @(posedge clk);
    chk(lat == 21, "event-to-FIFO latency 21 cycles");
    $display("latency %0d", lat);
    chk(drops == drops_exp && drops > 0, "energy-window drops");
    chk(exp_q[0].size() == 0, "all regular packages out");
    // offline flood and energy
    mode = MODE_FLOOD;
    for (int n = 0; n < 100; n++) event_in(1);
    repeat (40) @(posedge clk);   // let the pipeline drain before the mode changes
    mode = MODE_ENERGY;
    for (int n = 0; n < 100; n++) event_in(2);
    repeat (100) @(posedge clk);
    chk(exp_q[1].size() == 0 && exp_q[2].size() == 0, "all offline packages out");
    // online flood histogram
    mode = MODE_FLOOD; online = 1;
    @(negedge clk) hist_start = 1;
    @(negedge clk) hist_start = 0;
    repeat (262200) @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      for (int i = 0; i < 8; i++) area[i] = 16'(200 + $urandom % 3000);
      ev_valid = 1;
      @(negedge clk) ev_valid = 0;
      repeat (8) @(negedge clk);
    end
    repeat (40) @(posedge clk);
    @(negedge clk) hist_stop = 1;
    @(negedge clk) hist_stop = 0;
    hist_sum = 0; npk = 0;
    @(negedge clk) hist_read = 1;
    @(negedge clk) hist_read = 0;
    @(negedge clk);
    while (hist_busy || rd_valid[1]) @(negedge clk);
    chk(npk == 32768, "flood readout packages");
    chk(hist_sum == 300, "flood histogram total");
    chk(fifo_ovf == '0, "no FIFO overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
