// tb_spu_rate: the whole SPU logic at its default sizes under the source
// design's maximum event rate: each of the four blocks delivers one event
// every 125 clock cycles (1 M events/s per block at 125 MHz, the 1 us dead
// time), all four in the same cycle, so 4 M events/s, i.e. 512 Mbit/s of
// 16-byte packages, reach the Gigabit Ethernet uplink.
// How it works: the tables are loaded through command frames exactly as in
// tb_spu_top, the energy window is opened fully so that every event becomes
// a package, and 2000 events per block are injected with the MAC core always
// ready. Every package is parsed from the transmit frames and compared with
// a reference model computed in the testbench; the test also checks that no
// FIFO overflows, that the last package leaves within a bounded time, and
// reports the share of cycles the uplink byte stream is busy (about 170 of
// every 8 x 31.25 cycles = 68 % expected).
// The rate and package size come from the source design; the test pattern
// (aligned arrivals on all blocks, random area values) is this design's own.
module tb_spu_rate;
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

  localparam int N_EV = 2000;
  localparam int W_LO = 0, W_HI = 65535;   // energy window: fully open
  int n_busy = 0, n_cyc = 0;
  always @(posedge clk) if (!rst) begin n_cyc++; if (tx_valid) n_busy++; end

  // ---------------- counters ----------------
  int n_drop = 0, n_pass = 0, n_fill = 0, n_stall = 0, n_modesw = 0, n_full = 0, n_rxbad = 0;
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
            failures++;
            if (failures < 6) $display("package mismatch block %0d: %h exp %h", b, pk, ex);
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
      if (ec >= W_LO && ec <= W_HI) exp_q[b].push_back(make_regular(4'd7, 2'(b), ev));
      else n_drop_exp++;
    end else if (m == 1) exp_q[b].push_back(make_flood_raw(4'd7, 2'(b), ev));
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
    int t0, t_last_in, busy0, busy1, cyc0, cyc1;
    repeat (3) @(posedge clk);
    rst <= 0;
    // configuration
    cmds.push_back(cmd(OP_SET_MODID, 0, 0, 7));
    cmds.push_back(cmd(OP_SET_EWIN, 0, 0, {16'(W_HI), 16'(W_LO)}));
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
    chk(cmd_cnt == 16'(t0), "every command word decoded");
    // maximum rate: one event per block every 125 cycles, all blocks aligned
    busy0 = n_busy; cyc0 = n_cyc;
    for (int n = 0; n < N_EV; n++) begin
      fork
        event_in(0, 0, 0, 0);
        event_in(1, 0, 0, 0);
        event_in(2, 0, 0, 0);
        event_in(3, 0, 0, 0);
      join
      repeat (123) @(negedge clk);
    end
    busy1 = n_busy; cyc1 = n_cyc;
    t_last_in = n_cyc;
    for (int i = 0; i < 20000 && n_pk < 4 * N_EV; i++) @(posedge clk);
    $display("packages=%0d of %0d, frames=%0d, drain after last event=%0d cycles, uplink busy %0d of %0d cycles",
             n_pk, 4 * N_EV, n_frames, n_cyc - t_last_in, busy1 - busy0, cyc1 - cyc0);
    chk(n_pk == 4 * N_EV, "every event delivered as a package");
    for (int b = 0; b < 4; b++) chk(exp_q[b].size() == 0, "no package missing");
    chk(n_cyc - t_last_in < 2000, "backlog drained within 2000 cycles");
    chk(fifo_ovf == '0, "no FIFO overflow at the maximum rate");
    chk(n_drop == 0, "window fully open: no drops");
    chk((busy1 - busy0) * 100 < 80 * (cyc1 - cyc0), "uplink below 80 % busy");
    chk((busy1 - busy0) * 100 > 60 * (cyc1 - cyc0), "uplink above 60 % busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
