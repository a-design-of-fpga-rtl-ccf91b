// tb_spu_top: end-to-end test of the whole SPU logic at its default sizes.
// All control goes through Ethernet command frames on the receive stream
// and all results are parsed from frames on the transmit stream.
//   1. configure: module ID, energy window, boundary tables of all four
//      blocks (all 512 lines, both directions), time offsets and gains
//   2. regular mode: random events on all blocks plus a burst on block 2;
//      every package is checked against a model; the transmit side is
//      stalled now and then
//   3. flood offline mode: raw position packages checked
//   4. energy online mode on block 1: histogram run and readout, counts
//      checked; block 2 runs into the full flag with 1023 equal events
//   3b. energy offline mode: raw energy packages checked
//   4b. flood online mode on block 0: 400 events, readout of all 262144
//      counters checked
//   5. a frame for a wrong port is rejected
// Mechanisms counted (each must occur): filter drops, token passes, token
// bursts, fill packages, transmit stalls, mode switches, online and offline
// sub-modes, histogram full, rejected frame.
module tb_spu_top;
  import spu_pkg::*;
  import tb_net_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (8000000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [3:0] ev_valid = 0;
  logic [3:0][7:0][15:0] area = '0;
  logic [3:0][31:0] tdc = '0;
  logic [7:0] tx_data, rx_data = 0;
  logic tx_valid, tx_last, tx_ready = 1, rx_valid = 0, rx_last = 0;
  mode_e mode;
  logic online, fill_sent, rx_bad;
  logic [3:0] hist_full, hist_busy, filter_drop;
  logic [3:0][2:0][15:0] fifo_ovf;
  logic [2:0] token_pass;
  logic [15:0] cmd_cnt;
  spu_top dut (.*);

  localparam longint MY_MAC = 48'h020000000001, HOST_MAC = 48'h0200000000FE;
  localparam int MY_IP = 32'hC0A80A01, HOST_IP = 32'hC0A80AFE;

  // ---------------- model ----------------
  function automatic int frac(longint n, longint d, int bits);
    longint v;
    if (d == 0) return (1 << bits) - 1;
    v = (n << bits) / d;
    return (v > (1 << bits) - 1) ? (1 << bits) - 1 : int'(v);
  endfunction
  function automatic int bnd(int b, int line, int i); return 22 * (i + 1) + ((line + b) % 3); endfunction
  function automatic int toff(int b, int c); return c * 1000 - 7 + b; endfunction
  function automatic longint gain(int b, int c); return (longint'(1) << 20) / 28 + c * 8 + b; endfunction

  logic [127:0] exp_q[4][$];
  int hmodel[int];
  int n_drop_exp = 0;

  // ---------------- counters of mechanisms ----------------
  int n_drop = 0, n_pass = 0, n_fill = 0, n_stall = 0, n_modesw = 0, n_full = 0, n_rxbad = 0;
  int n_eraw = 0, n_fhist = 0;
  int n_burst = 0, n_pk = 0, n_hist_pk = 0, hist_total = 0, n_frames = 0, run_src = -1, run_len = 0;
  mode_e last_mode = MODE_REGULAR;
  always @(posedge clk) if (!rst) begin
    n_drop += $countones(filter_drop);
    n_pass += $countones(token_pass);
    if (fill_sent) n_fill++;
    if (tx_valid && !tx_ready) n_stall++;
    if (mode != last_mode) n_modesw++;
    last_mode = mode;
    if (rx_bad) n_rxbad++;
  end

  // ---------------- transmit-side parser ----------------
  bq_t fr;
  initial fr = {};
  always @(posedge clk) if (!rst && tx_valid && tx_ready) begin
    fr.push_back(tx_data);
    if (tx_last) begin
      bq_t ip;
      int npk;
      n_frames++;
      ip = fr[14:33];
      checks++;
      if (fr.size() != 14 + 20 + 8 + 128 || {fr[0], fr[1], fr[2], fr[3], fr[4], fr[5]} != 48'(HOST_MAC)
          || {fr[12], fr[13]} != 16'h0800 || ip_sum(ip) != 32'hFFFF || ip[9] != 8'd17
          || {fr[36], fr[37]} != 16'd5000) begin
        failures++; $display("bad frame header");
      end
      for (int p = 0; p < 8; p++) begin
        logic [127:0] pk;
        int b;
        for (int i = 0; i < 16; i++) pk[127 - 8*i -: 8] = fr[42 + 16*p + i];
        b = int'(pk[119:118]);
        if (pk[127:124] == PT_FILL) continue;
        if (pk[127:124] == PT_ENERGY_HIST || pk[127:124] == PT_FLOOD_HIST) begin
          n_hist_pk++;
          if (pk[127:124] == PT_FLOOD_HIST) n_fhist++;
          for (int i = 0; i < 8; i++) begin
            int a, e;
            a = int'(pk[117:100]) + i;
            e = hmodel.exists(b * 1000000 + a) ? hmodel[b * 1000000 + a] : 0;
            hist_total += int'(pk[i*10 +: 10]);
            if (int'(pk[i*10 +: 10]) != e) begin
              failures++; $display("hist blk %0d addr %0d = %0d exp %0d", b, a, pk[i*10 +: 10], e);
            end
          end
          if (pk[99] && b == 2) n_full++;
          continue;
        end
        n_pk++;
        if (pk[127:124] == PT_ENERGY_RAW) n_eraw++;
        checks++;
        if (b == run_src) run_len++; else begin run_src = b; run_len = 1; end
        if (run_len == 16) n_burst++;
        begin
          logic [127:0] ex;
          ex = '0;
          if (exp_q[b].size() != 0) begin
            ex = exp_q[b][0];
            exp_q[b].delete(0);
          end
          if (pk != ex) begin
            failures++; $display("package mismatch block %0d: %h exp %h", b, pk, ex);
          end
        end
      end
      fr = {};
    end
  end

  // ---------------- command frames ----------------
  logic [63:0] cmds[$];
  task automatic send_frame(bq_t f);
    for (int i = 0; i < f.size(); i++) begin
      @(negedge clk);
      rx_valid = 1; rx_data = f[i]; rx_last = i == f.size() - 1;
    end
    @(negedge clk) begin rx_valid = 0; rx_last = 0; end
    repeat (12) @(negedge clk);   // inter-frame gap
  endtask
  task automatic flush_cmds(int port = 5001);
    while (cmds.size() != 0) begin
      bq_t pay;
      pay = {};
      for (int k = 0; k < 180 && cmds.size() != 0; k++) begin
        logic [63:0] w;
        w = cmds.pop_front();
        for (int i = 7; i >= 0; i--) pay.push_back(w[i*8 +: 8]);
      end
      send_frame(mac_hdr(MY_MAC, HOST_MAC, 16'h0800, ip_hdr(HOST_IP, MY_IP, udp_hdr(5001, port, pay), 0)));
    end
  endtask
  function automatic logic [63:0] cmd(logic [7:0] op, int b, int a, logic [31:0] d);
    return {op, 2'(b), 22'(a), d};
  endfunction

  // ---------------- events ----------------
  task automatic event_in(int b, int m, int fixed_a, int fixed_c);
    longint a[8], s1, s2, e, ec;
    int x, y, doi, nx, ny, cid, t;
    event_t ev;
    @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      a[i] = (fixed_a != 0) ? fixed_a : 200 + longint'($urandom % 3000);
      area[b][i] = 16'(a[i]);
    end
    t = $urandom;
    tdc[b] = t;
    ev_valid[b] = 1;
    s1 = a[0] + a[1] + a[2] + a[3];
    s2 = a[4] + a[5] + a[6] + a[7];
    e = s1 + s2;
    x = (frac(a[0] + a[3], s1, 9) + frac(a[4] + a[7], s2, 9)) / 2;
    y = (frac(a[0] + a[1], s1, 9) + frac(a[6] + a[7], s2, 9)) / 2;
    doi = frac(s1, e, 4);
    nx = 0; ny = 0;
    for (int i = 0; i < 22; i++) begin
      if (bnd(b, y, i) <= x) nx++;
      if (bnd(b, x, i) <= y) ny++;
    end
    cid = ny * 23 + nx + 1;
    ec = (e * gain(b, cid - 1)) >> 20;
    if (ec > 65535) ec = 65535;
    ev = '0;
    ev.x = 9'(x); ev.y = 9'(y); ev.doi = 4'(doi); ev.cid = 10'(cid); ev.esum = 19'(e);
    ev.tcorr = 32'(t) + 32'(toff(b, cid - 1)); ev.ecorr = 16'(ec);
    if (m == 0) begin
      if (ec >= 350 && ec <= 650) exp_q[b].push_back(make_regular(4'd7, 2'(b), ev));
      else n_drop_exp++;
    end
    else if (m == 1) exp_q[b].push_back(make_flood_raw(4'd7, 2'(b), ev));
    else if (m == 2) exp_q[b].push_back(make_energy_raw(4'd7, 2'(b), ev));
    else if (m == 4) begin
      int adr;
      adr = y * 512 + x;
      hmodel[b * 1000000 + adr] = hmodel.exists(b * 1000000 + adr) ? hmodel[b * 1000000 + adr] + 1 : 1;
    end
    else if (m == 3) begin
      int bin, adr;
      bin = int'(e >> 6); if (bin > 255) bin = 255;
      adr = (cid - 1) * 256 + bin;
      if (!(b == 2 && hmodel.exists(b * 1000000 + adr) && hmodel[b * 1000000 + adr] == 1023))
        hmodel[b * 1000000 + adr] = hmodel.exists(b * 1000000 + adr) ? hmodel[b * 1000000 + adr] + 1 : 1;
    end
    @(negedge clk) ev_valid[b] = 0;
  endtask

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst <= 0;
    fork forever begin
      @(negedge clk);
      tx_ready = ($urandom % 50) != 0;
    end join_none
    // 1. configuration
    cmds.push_back(cmd(OP_SET_MODID, 0, 0, 7));
    cmds.push_back(cmd(OP_SET_EWIN, 0, 0, {16'd650, 16'd350}));
    cmds.push_back(cmd(OP_SET_ESHIFT, 0, 0, 6));
    for (int b = 0; b < 4; b++) begin
      for (int r = 0; r < 512; r++)
        for (int i = 0; i < 22; i++) begin
          cmds.push_back(cmd(OP_WR_XB, b, r * 32 + i, bnd(b, r, i)));
          cmds.push_back(cmd(OP_WR_YB, b, r * 32 + i, bnd(b, r, i)));
        end
      for (int c = 0; c < 529; c++) begin
        cmds.push_back(cmd(OP_WR_TOFF, b, c, toff(b, c)));
        cmds.push_back(cmd(OP_WR_GAIN, b, c, int'(gain(b, c))));
      end
    end
    t0 = cmds.size();
    flush_cmds();
    repeat (20) @(posedge clk);
    chk(cmd_cnt == 16'(t0), "every command word decoded (16-bit counter)");
    // 2. regular mode, all blocks, then a burst on block 2
    for (int n = 0; n < 400; n++) begin
      event_in(n % 4, 0, (n < 4) ? 1700 : 0, 0);
      repeat ($urandom % 20) @(negedge clk);
    end
    for (int n = 0; n < 100; n++) event_in(2, 0, 1700, 0);
    repeat (20000) @(posedge clk);
    for (int b = 0; b < 4; b++) chk(exp_q[b].size() == 0, "regular packages delivered");
    chk(n_drop == n_drop_exp, "filter drops as modelled");
    // 3. flood offline
    cmds.push_back(cmd(OP_SET_MODE, 0, 0, 1));
    flush_cmds();
    chk(mode == MODE_FLOOD && !online, "flood offline selected");
    for (int n = 0; n < 80; n++) begin
      event_in(n % 4, 1, 0, 0);
      repeat ($urandom % 40) @(negedge clk);
    end
    repeat (20000) @(posedge clk);
    for (int b = 0; b < 4; b++) chk(exp_q[b].size() == 0, "flood packages delivered");
    // 3b. energy offline
    cmds.push_back(cmd(OP_SET_MODE, 0, 0, 2));
    flush_cmds();
    chk(mode == MODE_ENERGY && !online, "energy offline selected");
    for (int n = 0; n < 80; n++) begin
      event_in(n % 4, 2, 0, 0);
      repeat ($urandom % 40) @(negedge clk);
    end
    repeat (20000) @(posedge clk);
    for (int b = 0; b < 4; b++) chk(exp_q[b].size() == 0, "energy raw packages delivered");
    chk(n_eraw == 80, "energy raw package count");
    // 4. energy online, blocks 1 and 2
    cmds.push_back(cmd(OP_SET_MODE, 0, 0, 32'h6));
    cmds.push_back(cmd(OP_HIST_START, 0, 0, 32'h6));
    flush_cmds();
    chk(mode == MODE_ENERGY && online, "energy online selected");
    wait (hist_busy[1] && hist_busy[2]);
    repeat (262200) @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      event_in(1, 3, 0, 0);
      repeat (6) @(negedge clk);
    end
    for (int n = 0; n < 1030; n++) begin
      event_in(2, 3, 1500, 0);
      repeat (6) @(negedge clk);
    end
    repeat (100) @(posedge clk);
    chk(hist_full == 4'b0100, "block 2 histogram full");
    cmds.push_back(cmd(OP_HIST_STOP, 0, 0, 32'h2));
    cmds.push_back(cmd(OP_HIST_READ, 0, 0, 32'h6));
    flush_cmds();
    wait (!hist_busy[1] && !hist_busy[2]);
    for (int i = 0; i < 100000 && n_hist_pk < 2 * 529 * 256 / 8; i++) @(posedge clk);
    repeat (2000) @(posedge clk);
    chk(n_hist_pk == 2 * 529 * 256 / 8, "energy histogram packages");
    chk(hist_total == 300 + 1023, "energy histogram totals");
    // 4b. flood online, block 0
    cmds.push_back(cmd(OP_SET_MODE, 0, 0, 32'h5));
    cmds.push_back(cmd(OP_HIST_START, 0, 0, 32'h1));
    flush_cmds();
    chk(mode == MODE_FLOOD && online, "flood online selected");
    wait (hist_busy[0]);
    repeat (262200) @(posedge clk);   // clearing sweep
    for (int n = 0; n < 400; n++) begin
      event_in(0, 4, 0, 0);
      repeat (6) @(negedge clk);
    end
    repeat (100) @(posedge clk);
    cmds.push_back(cmd(OP_HIST_STOP, 0, 0, 32'h1));
    cmds.push_back(cmd(OP_HIST_READ, 0, 0, 32'h1));
    flush_cmds();
    for (int i = 0; i < 1000000 && n_fhist < 512 * 512 / 8; i++) @(posedge clk);
    repeat (2000) @(posedge clk);
    chk(n_fhist == 512 * 512 / 8, "flood histogram packages");
    chk(hist_total == 300 + 1023 + 400, "flood histogram total");
    // 5. frame for a wrong port
    cmds.push_back(cmd(OP_SET_MODE, 0, 0, 0));
    flush_cmds(5009);
    chk(mode == MODE_FLOOD, "rejected frame has no effect");
    chk(fifo_ovf == '0, "no FIFO overflow");
    $display("frames=%0d packages=%0d hist_pk=%0d drops=%0d passes=%0d bursts=%0d fills=%0d stalls=%0d modesw=%0d full=%0d rxbad=%0d",
             n_frames, n_pk, n_hist_pk, n_drop, n_pass, n_burst, n_fill, n_stall, n_modesw, n_full, n_rxbad);
    chk(n_drop > 0, "mechanism: energy-window drop");
    chk(n_pass > 0, "mechanism: token pass");
    chk(n_burst > 0, "mechanism: token burst limit");
    chk(n_fill > 0, "mechanism: fill package");
    chk(n_stall > 0, "mechanism: transmit stall");
    chk(n_modesw >= 2, "mechanism: mode switch");
    chk(n_full > 0, "mechanism: histogram full flag");
    chk(n_rxbad > 0, "mechanism: rejected frame");
    chk(n_eraw > 0, "mechanism: energy offline sub-mode");
    chk(n_fhist > 0, "mechanism: flood online sub-mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
