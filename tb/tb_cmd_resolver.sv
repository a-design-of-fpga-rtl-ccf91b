// tb_cmd_resolver: sends command words as UDP payload bytes (several per
// datagram, with a trailing partial word) and checks mode, online flag,
// window, shift, module ID, histogram pulses and table-write pulses.
// How: expected register values are kept in the testbench and compared after
// every word; a trailing partial word at the end of a datagram must be
// ignored, and an unknown opcode (0x7F) must write no table and keep the
// mode. Timing: each command is checked three cycles after its last byte.
// Host control of modes and tables follows the source design; the command
// format is this design's own.
module tb_cmd_resolver;
  import spu_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [7:0] in_data = 0;
  logic in_valid = 0, in_last = 0;
  mode_e mode;
  logic online, cfg_we;
  logic [3:0] mod_id, hist_start, hist_stop, hist_read;
  logic [15:0] win_lo, win_hi, cmd_cnt;
  logic [4:0] eshift;
  logic [1:0] cfg_blk;
  cfg_target_e cfg_target;
  logic [21:0] cfg_addr;
  logic [31:0] cfg_data;
  cmd_resolver dut (.*);
  int we_cnt = 0, hs = 0, hp = 0, hr = 0;
  logic [63:0] last_we;
  always @(posedge clk) if (!rst) begin
    if (cfg_we) begin we_cnt++; last_we = {6'(cfg_target), cfg_blk, cfg_addr, cfg_data}; end
    if (hist_start != 0) hs = int'(hist_start);
    if (hist_stop != 0) hp = int'(hist_stop);
    if (hist_read != 0) hr = int'(hist_read);
  end
  task automatic send(logic [63:0] w, bit last);
    for (int i = 7; i >= 0; i--) begin
      @(negedge clk);
      in_valid = 1; in_data = w[i*8 +: 8]; in_last = last && i == 0;
      @(negedge clk) begin in_valid = 0; in_last = 0; end
    end
    repeat (2) @(negedge clk);
  endtask
  function automatic logic [63:0] cmd(logic [7:0] op, logic [1:0] b, logic [21:0] a, logic [31:0] d);
    return {op, b, a, d};
  endfunction
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    chk(mode == MODE_REGULAR && !online && win_lo == 0 && win_hi == 16'hFFFF, "reset state");
    send(cmd(8'h01, 0, 0, 32'h6), 0);
    chk(mode == MODE_ENERGY && online, "set mode energy online");
    send(cmd(8'h01, 0, 0, 32'h1), 0);
    chk(mode == MODE_FLOOD && !online, "set mode flood offline");
    send(cmd(8'h14, 0, 0, {16'd650, 16'd350}), 0);
    chk(win_lo == 16'd350 && win_hi == 16'd650, "energy window");
    send(cmd(8'h15, 0, 0, 32'd6), 0);
    chk(eshift == 5'd6, "eshift");
    send(cmd(8'h16, 0, 0, 32'd11), 1);
    chk(mod_id == 4'd11, "module id");
    // partial word at end of a datagram is ignored, next word decodes
    for (int i = 0; i < 3; i++) begin
      @(negedge clk) begin in_valid = 1; in_data = 8'h01; in_last = i == 2; end
    end
    @(negedge clk) begin in_valid = 0; in_last = 0; end
    send(cmd(8'h02, 0, 0, 32'h5), 0);
    chk(hs == 5, "hist start mask");
    send(cmd(8'h03, 0, 0, 32'h4), 0);
    chk(hp == 4, "hist stop mask");
    send(cmd(8'h04, 0, 0, 32'hF), 0);
    chk(hr == 15, "hist read mask");
    send(cmd(8'h10, 2, {9'd7, 5'd3}, 32'd14), 0);
    chk(last_we == {6'(CFG_CLT_XB), 2'd2, 22'({9'd7, 5'd3}), 32'd14}, "write x boundary");
    send(cmd(8'h11, 1, {9'd11, 5'd0}, 32'd7), 0);
    chk(last_we == {6'(CFG_CLT_YB), 2'd1, 22'({9'd11, 5'd0}), 32'd7}, "write y boundary");
    send(cmd(8'h12, 3, 22'd528, 32'hDEADBEEF), 0);
    chk(last_we == {6'(CFG_TOFF), 2'd3, 22'd528, 32'hDEADBEEF}, "write time offset");
    send(cmd(8'h13, 0, 22'd75, 32'h0020B51E), 0);
    chk(last_we == {6'(CFG_GAIN), 2'd0, 22'd75, 32'h0020B51E}, "write gain");
    send(cmd(8'h7F, 0, 0, 0), 1);
    chk(we_cnt == 4, "four table writes");
    chk(cmd_cnt == 16'd13, "command count");
    chk(mode == MODE_FLOOD, "mode kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
