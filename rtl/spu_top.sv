// spu_top: digital signal processing logic of one singles processing unit
// (SPU) of a small-animal PET scanner: four detector blocks, each read out
// through eight area values (A1..D1, A2..D2) and a TDC time word.
//
//   per block:  block_proc (energy sum, centre-of-gravity position and DOI,
//               boundary-CLT crystal identification, time offset and photo
//               peak correction, energy window, packaging, online histogram,
//               three block FIFOs)
//   readout:    three token rings (regular / flood / energy packages), each
//               over the four blocks, and a mode multiplexer
//   uplink:     udp_tx -> ip_tx -> mac_tx -> Ethernet MAC core (tx_* ports)
//   downlink:   Ethernet MAC core (rx_* ports) -> mac_rx -> ip_rx -> udp_rx
//               -> cmd_resolver, which sets the mode and writes the tables
//
// The structure follows the source design. The Ethernet MAC core and PHY
// are outside this module: tx_* and rx_* are the MAC core's 8-bit user
// streams. Addresses, ports and buffer sizes are parameters of this
// design's choosing. Clock: a single 125 MHz clock; rst is synchronous.
module spu_top
  import spu_pkg::*;
#(
  parameter int          HIST_AW        = 18,
  parameter int          REG_DEPTH      = 512,
  parameter int          AUX_DEPTH      = 512,
  parameter int          MAX_BURST      = 16,
  parameter int          PKGS_PER_DGRAM = 8,
  parameter int          FLUSH_WAIT     = 256,
  parameter logic [47:0] MY_MAC         = 48'h02_00_00_00_00_01,
  parameter logic [47:0] HOST_MAC       = 48'h02_00_00_00_00_FE,
  parameter logic [31:0] MY_IP          = 32'hC0A8_0A01,   // 192.168.10.1
  parameter logic [31:0] HOST_IP        = 32'hC0A8_0AFE,   // 192.168.10.254
  parameter logic [15:0] DATA_PORT      = 16'd5000,
  parameter logic [15:0] CMD_PORT       = 16'd5001
) (
  input  logic                                 clk,
  input  logic                                 rst,
  input  logic [N_BLOCKS-1:0]                  ev_valid,
  input  logic [N_BLOCKS-1:0][7:0][AREA_W-1:0] area,
  input  logic [N_BLOCKS-1:0][TDC_W-1:0]       tdc,
  output logic [7:0]                           tx_data,
  output logic                                 tx_valid,
  output logic                                 tx_last,
  input  logic                                 tx_ready,
  input  logic [7:0]                           rx_data,
  input  logic                                 rx_valid,
  input  logic                                 rx_last,
  output mode_e                                mode,
  output logic                                 online,
  output logic [N_BLOCKS-1:0]                  hist_full,
  output logic [N_BLOCKS-1:0]                  hist_busy,
  output logic [N_BLOCKS-1:0]                  filter_drop,
  output logic [N_BLOCKS-1:0][2:0][15:0]       fifo_ovf,
  output logic [2:0]                           token_pass,
  output logic                                 fill_sent,
  output logic                                 rx_bad,
  output logic [15:0]                          cmd_cnt
);
  // ---------------- command path ----------------
  logic [7:0] m_d, i_d, u_d;
  logic       m_v, m_l, i_v, i_l, u_v, u_l;
  logic [2:0] bad;
  mac_rx u_mac_rx (.clk, .rst, .my_mac(MY_MAC), .in_data(rx_data), .in_valid(rx_valid),
    .in_last(rx_last), .out_data(m_d), .out_valid(m_v), .out_last(m_l), .frame_bad(bad[0]));
  ip_rx u_ip_rx (.clk, .rst, .my_ip(MY_IP), .in_data(m_d), .in_valid(m_v), .in_last(m_l),
    .out_data(i_d), .out_valid(i_v), .out_last(i_l), .frame_bad(bad[1]));
  udp_rx u_udp_rx (.clk, .rst, .my_port(CMD_PORT), .in_data(i_d), .in_valid(i_v), .in_last(i_l),
    .out_data(u_d), .out_valid(u_v), .out_last(u_l), .frame_bad(bad[2]));
  assign rx_bad = |bad;

  logic [3:0]         mod_id;
  logic [ECORR_W-1:0] win_lo, win_hi;
  logic [4:0]         eshift;
  logic [3:0]         h_start, h_stop, h_read;
  logic               cfg_we;
  logic [1:0]         cfg_blk;
  cfg_target_e        cfg_target;
  logic [21:0]        cfg_addr;
  logic [31:0]        cfg_data;
  cmd_resolver u_cmd (.clk, .rst, .in_data(u_d), .in_valid(u_v), .in_last(u_l), .mode, .online,
    .mod_id, .win_lo, .win_hi, .eshift, .hist_start(h_start), .hist_stop(h_stop),
    .hist_read(h_read), .cfg_we, .cfg_blk, .cfg_target, .cfg_addr, .cfg_data, .cmd_cnt);

  // ---------------- four detector blocks ----------------
  logic [N_BLOCKS-1:0][2:0]            b_valid, b_rd;
  logic [N_BLOCKS-1:0][2:0][PKG_W-1:0] b_data;

  for (genvar b = 0; b < N_BLOCKS; b++) begin : g_blk
    block_proc #(.BLK_ID(2'(b)), .HIST_AW(HIST_AW), .REG_DEPTH(REG_DEPTH),
                 .AUX_DEPTH(AUX_DEPTH)) u_blk (
      .clk, .rst, .ev_valid(ev_valid[b]), .area(area[b]), .tdc(tdc[b]), .mode, .online, .mod_id,
      .win_lo, .win_hi, .eshift, .cfg_we(cfg_we && cfg_blk == 2'(b)), .cfg_target, .cfg_addr,
      .cfg_data, .hist_start(h_start[b]), .hist_stop(h_stop[b]), .hist_read(h_read[b]),
      .rd_valid(b_valid[b]), .rd_data(b_data[b]), .rd_en(b_rd[b]), .hist_full(hist_full[b]),
      .hist_busy(hist_busy[b]), .filter_drop(filter_drop[b]), .fifo_ovf(fifo_ovf[b]));
  end

  // ---------------- token rings and mode multiplexer ----------------
  logic [2:0]            r_valid, r_ready;
  logic [2:0][PKG_W-1:0] r_data;
  for (genvar t = 0; t < 3; t++) begin : g_ring
    logic [N_BLOCKS-1:0]            iv, ird;
    logic [N_BLOCKS-1:0][PKG_W-1:0] idat;
    for (genvar b = 0; b < N_BLOCKS; b++) begin : g_in
      assign iv[b]      = b_valid[b][t];
      assign idat[b]    = b_data[b][t];
      assign b_rd[b][t] = ird[b];
    end
    token_ring_readout #(.N(N_BLOCKS), .W(PKG_W), .MAX_BURST(MAX_BURST)) u_ring (.clk, .rst,
      .in_valid(iv), .in_data(idat), .in_rd(ird), .out_valid(r_valid[t]), .out_data(r_data[t]),
      .out_src(), .out_ready(r_ready[t]), .token_pass(token_pass[t]));
  end

  logic             p_valid, p_ready;
  logic [PKG_W-1:0] p_data;
  readout_mux u_mux (.mode, .in_valid(r_valid), .in_data(r_data), .in_ready(r_ready),
    .out_valid(p_valid), .out_data(p_data), .out_ready(p_ready));

  // ---------------- uplink ----------------
  logic [7:0]  ud, id;
  logic        uv, ul, ur, iv2, il, ir;
  logic [15:0] ulen, ilen;
  udp_tx #(.PKGS_PER_DGRAM(PKGS_PER_DGRAM), .FLUSH_WAIT(FLUSH_WAIT)) u_udp_tx (.clk, .rst,
    .src_port(DATA_PORT), .dst_port(DATA_PORT), .pkg_valid(p_valid), .pkg(p_data),
    .pkg_ready(p_ready), .out_data(ud), .out_valid(uv), .out_last(ul), .out_ready(ur),
    .out_len(ulen), .fill_sent);
  ip_tx u_ip_tx (.clk, .rst, .src_ip(MY_IP), .dst_ip(HOST_IP), .in_data(ud), .in_valid(uv),
    .in_last(ul), .in_ready(ur), .in_len(ulen), .out_data(id), .out_valid(iv2), .out_last(il),
    .out_ready(ir), .out_len(ilen));
  mac_tx u_mac_tx (.clk, .rst, .src_mac(MY_MAC), .dst_mac(HOST_MAC), .in_data(id),
    .in_valid(iv2), .in_last(il), .in_ready(ir), .in_len(ilen), .out_data(tx_data),
    .out_valid(tx_valid), .out_last(tx_last), .out_ready(tx_ready));
endmodule
