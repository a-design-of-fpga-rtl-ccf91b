// block_proc: the complete processing chain of one detector block.
//   energy_sum -> cog_position -> boundary_clt -> time_offset_corr ->
//   photon_peak_corr -> event_filter -> event_packager -> block FIFOs
//                                                     \-> online_histogram
// Every event runs through the whole pipeline in every mode (20 cycles from
// ev_valid to the package, 21 to the FIFO head); the mode at the end of the
// pipeline decides what leaves it: regular
// packages (energy-window filtered), raw flood or raw energy packages
// (offline sub-modes, filter bypassed), or histogram updates (online
// sub-modes). Online histogram readout packages enter the flood or energy
// FIFO, whichever matches the histogram, yielding to event packages.
// There are three FIFOs per block, one per package type, each read by its
// own token ring. The chain and the three rings follow the source design;
// FIFO depths and the shared pipeline for all modes are design choices.
// Configuration writes (cfg_*) are already decoded for this block:
// cfg_target selects the table, cfg_addr = {row, boundary index} for the
// boundary tables or crystal ID - 1 for the per-crystal tables.
module block_proc
  import spu_pkg::*;
#(
  parameter logic [1:0] BLK_ID     = 2'd0,
  parameter int         HIST_AW    = 18,
  parameter int         REG_DEPTH  = 512,
  parameter int         AUX_DEPTH  = 512
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   ev_valid,
  input  logic [7:0][AREA_W-1:0] area,
  input  logic [TDC_W-1:0]       tdc,
  input  mode_e                  mode,
  input  logic                   online,
  input  logic [3:0]             mod_id,
  input  logic [ECORR_W-1:0]     win_lo,
  input  logic [ECORR_W-1:0]     win_hi,
  input  logic [4:0]             eshift,
  input  logic                   cfg_we,
  input  cfg_target_e            cfg_target,
  input  logic [21:0]            cfg_addr,
  input  logic [31:0]            cfg_data,
  input  logic                   hist_start,
  input  logic                   hist_stop,
  input  logic                   hist_read,
  output logic [2:0]             rd_valid,
  output logic [2:0][PKG_W-1:0]  rd_data,
  input  logic [2:0]             rd_en,
  output logic                   hist_full,
  output logic                   hist_busy,
  output logic                   filter_drop,
  output logic [2:0][15:0]       fifo_ovf
);
  event_t e0, e1, e2, e3, e4, e5, e6;
  logic   v1, v2, v3, v4, v5, v6;

  always_comb begin
    e0      = '0;
    e0.area = area;
    e0.tdc  = tdc;
  end

  energy_sum u_sum (.clk, .rst, .in_valid(ev_valid), .in_ev(e0), .out_valid(v1), .out_ev(e1));
  cog_position u_cog (.clk, .rst, .in_valid(v1), .in_ev(e1), .out_valid(v2), .out_ev(e2));
  boundary_clt u_clt (.clk, .rst, .in_valid(v2), .in_ev(e2), .out_valid(v3), .out_ev(e3),
    .cfg_we(cfg_we && (cfg_target == CFG_CLT_XB || cfg_target == CFG_CLT_YB)),
    .cfg_sel(cfg_target == CFG_CLT_YB), .cfg_row(cfg_addr[13:5]), .cfg_idx(cfg_addr[4:0]),
    .cfg_data(cfg_data[COORD_W-1:0]));
  time_offset_corr u_toff (.clk, .rst, .in_valid(v3), .in_ev(e3), .out_valid(v4), .out_ev(e4),
    .cfg_we(cfg_we && cfg_target == CFG_TOFF), .cfg_addr(cfg_addr[CID_W-1:0]),
    .cfg_data(cfg_data[TDC_W-1:0]));
  photon_peak_corr u_peak (.clk, .rst, .in_valid(v4), .in_ev(e4), .out_valid(v5), .out_ev(e5),
    .cfg_we(cfg_we && cfg_target == CFG_GAIN), .cfg_addr(cfg_addr[CID_W-1:0]),
    .cfg_data(cfg_data[GAIN_W-1:0]));
  event_filter u_filt (.clk, .rst, .in_valid(v5), .in_ev(e5), .bypass(mode != MODE_REGULAR),
    .win_lo, .win_hi, .out_valid(v6), .out_ev(e6), .drop(filter_drop));

  logic             reg_v, fl_v, en_v, h_v;
  logic [PKG_W-1:0] reg_p, fl_p, en_p;
  event_t           h_ev;
  event_packager u_pack (.clk, .rst, .in_valid(v6), .in_ev(e6), .mode, .online, .mod_id,
    .blk_id(BLK_ID), .reg_valid(reg_v), .reg_pkg(reg_p), .flood_valid(fl_v), .flood_pkg(fl_p),
    .energy_valid(en_v), .energy_pkg(en_p), .hist_valid(h_v), .hist_ev(h_ev));

  logic             hp_v, hp_rdy;
  logic [PKG_W-1:0] hp;
  logic             hp_is_energy;
  logic [2:0]       ff_full;
  online_histogram #(.HIST_AW(HIST_AW)) u_hist (.clk, .rst, .mode, .eshift, .start(hist_start),
    .stop(hist_stop), .readout(hist_read), .ev_valid(h_v), .ev(h_ev), .mod_id, .blk_id(BLK_ID),
    .pkg_valid(hp_v), .pkg(hp), .pkg_ready(hp_rdy), .running(), .busy(hist_busy),
    .full(hist_full), .drop_cnt());

  assign hp_is_energy = hp[127:124] == PT_ENERGY_HIST;
  assign hp_rdy = hp_is_energy ? (!ff_full[2] && !en_v) : (!ff_full[1] && !fl_v);

  logic [2:0]            wr;
  logic [2:0][PKG_W-1:0] wd;
  always_comb begin
    wr[0] = reg_v;
    wd[0] = reg_p;
    wr[1] = fl_v || (hp_v && hp_rdy && !hp_is_energy);
    wd[1] = fl_v ? fl_p : hp;
    wr[2] = en_v || (hp_v && hp_rdy && hp_is_energy);
    wd[2] = en_v ? en_p : hp;
  end

  sync_fifo #(.W(PKG_W), .DEPTH(REG_DEPTH)) u_fifo_reg (.clk, .rst, .wr_en(wr[0]), .wr_data(wd[0]),
    .full(ff_full[0]), .rd_en(rd_en[0]), .rd_valid(rd_valid[0]), .rd_data(rd_data[0]), .level(),
    .ovf_cnt(fifo_ovf[0]));
  sync_fifo #(.W(PKG_W), .DEPTH(AUX_DEPTH)) u_fifo_fl (.clk, .rst, .wr_en(wr[1]), .wr_data(wd[1]),
    .full(ff_full[1]), .rd_en(rd_en[1]), .rd_valid(rd_valid[1]), .rd_data(rd_data[1]), .level(),
    .ovf_cnt(fifo_ovf[1]));
  sync_fifo #(.W(PKG_W), .DEPTH(AUX_DEPTH)) u_fifo_en (.clk, .rst, .wr_en(wr[2]), .wr_data(wd[2]),
    .full(ff_full[2]), .rd_en(rd_en[2]), .rd_valid(rd_valid[2]), .rd_data(rd_data[2]), .level(),
    .ovf_cnt(fifo_ovf[2]));
endmodule
