// spu_pkg: widths, enumerations, the event record and the 16-byte package
// layout shared by the singles-processing logic of a four-block small-animal
// PET detector module.
//
// From the source design: four detector blocks of 23x23 crystals, 9-bit raw
// x and y, 4-bit depth of interaction (DOI), 22 boundaries per direction,
// 10-bit histogram counters in a 512x512 RAM, 16-byte packages.
// This design's own choices: the 16-bit area values, the 32-bit TDC word and
// time offset, the 28-bit gain (20 fraction bits), the 16-bit corrected
// energy, and the bit layout of every package (see make_* functions below).
package spu_pkg;

  localparam int N_BLOCKS   = 4;
  localparam int AREA_W     = 16;
  localparam int ESUM_W     = AREA_W + 3;
  localparam int COORD_W    = 9;
  localparam int DOI_W      = 4;
  localparam int N_1D       = 23;             // crystals per row and column
  localparam int N_BOUND    = N_1D - 1;       // boundaries per direction
  localparam int N_CRYSTALS = N_1D * N_1D;    // 529
  localparam int CID_W      = 10;
  localparam int BIDX_W     = 5;              // boundary index 0..21
  localparam int TDC_W      = 32;
  localparam int GAIN_W     = 28;
  localparam int GAIN_FRAC  = 20;
  localparam int ECORR_W    = 16;
  localparam int HCNT_W     = 10;
  localparam int EBIN_W     = 8;              // 256 energy bins per crystal
  localparam int PKG_W      = 128;
  localparam int HIST_PER_PKG = 8;            // histogram counts per package

  typedef enum logic [1:0] {
    MODE_REGULAR = 2'd0,
    MODE_FLOOD   = 2'd1,
    MODE_ENERGY  = 2'd2
  } mode_e;

  typedef enum logic [3:0] {
    PT_FILL        = 4'd0,
    PT_REGULAR     = 4'd1,
    PT_FLOOD_RAW   = 4'd2,
    PT_ENERGY_RAW  = 4'd3,
    PT_FLOOD_HIST  = 4'd4,
    PT_ENERGY_HIST = 4'd5
  } pkg_type_e;

  // LUT targets written by configuration commands
  typedef enum logic [1:0] {
    CFG_CLT_XB = 2'd0,   // x boundaries, one row per raw y
    CFG_CLT_YB = 2'd1,   // y boundaries, one row per raw x
    CFG_TOFF   = 2'd2,   // time offset per crystal
    CFG_GAIN   = 2'd3    // photo-peak gain per crystal
  } cfg_target_e;

  typedef struct packed {
    logic [7:0][AREA_W-1:0] area;   // index 0..7 = A1,B1,C1,D1,A2,B2,C2,D2
    logic [ESUM_W-1:0]      esum;   // sum of the eight, uncorrected energy
    logic [TDC_W-1:0]       tdc;    // raw TDC result
    logic [COORD_W-1:0]     x;      // raw x, units of 1/512
    logic [COORD_W-1:0]     y;
    logic [DOI_W-1:0]       doi;    // units of 1/16
    logic [CID_W-1:0]       cid;    // crystal ID 1..529
    logic [TDC_W-1:0]       tcorr;  // offset-corrected time
    logic [ECORR_W-1:0]     ecorr;  // peak-corrected energy, 511 = photo peak
  } event_t;

  typedef struct packed {
    logic [7:0]  opcode;
    logic [1:0]  blk;
    logic [21:0] addr;
    logic [31:0] data;
  } cmd_t;

  localparam logic [7:0] OP_SET_MODE   = 8'h01; // data[1:0]=mode, data[2]=online
  localparam logic [7:0] OP_HIST_START = 8'h02; // data[3:0]=block mask
  localparam logic [7:0] OP_HIST_STOP  = 8'h03;
  localparam logic [7:0] OP_HIST_READ  = 8'h04;
  localparam logic [7:0] OP_WR_XB      = 8'h10; // addr={row[8:0],idx[4:0]}, data[8:0]
  localparam logic [7:0] OP_WR_YB      = 8'h11;
  localparam logic [7:0] OP_WR_TOFF    = 8'h12; // addr=crystal index 0..528
  localparam logic [7:0] OP_WR_GAIN    = 8'h13;
  localparam logic [7:0] OP_SET_EWIN   = 8'h14; // data={hi[15:0],lo[15:0]}
  localparam logic [7:0] OP_SET_ESHIFT = 8'h15; // data[4:0]
  localparam logic [7:0] OP_SET_MODID  = 8'h16; // data[3:0]

  // Package layouts. Common head: [127:124] type, [123:120] module ID,
  // [119:118] block ID.
  function automatic logic [PKG_W-1:0] make_regular(logic [3:0] mod_id, logic [1:0] blk_id,
                                                    event_t e);
    logic [PKG_W-1:0] p;
    p = '0;
    p[127:124] = PT_REGULAR;
    p[123:120] = mod_id;
    p[119:118] = blk_id;
    p[117:108] = e.cid;
    p[107:104] = e.doi;
    p[103:88]  = e.ecorr;
    p[87:56]   = e.tcorr;
    p[55:47]   = e.x;
    p[46:38]   = e.y;
    return p;
  endfunction

  function automatic logic [PKG_W-1:0] make_flood_raw(logic [3:0] mod_id, logic [1:0] blk_id,
                                                      event_t e);
    logic [PKG_W-1:0] p;
    p = '0;
    p[127:124] = PT_FLOOD_RAW;
    p[123:120] = mod_id;
    p[119:118] = blk_id;
    p[117:109] = e.x;
    p[108:100] = e.y;
    p[99:96]   = e.doi;
    p[95:77]   = e.esum;
    return p;
  endfunction

  function automatic logic [PKG_W-1:0] make_energy_raw(logic [3:0] mod_id, logic [1:0] blk_id,
                                                       event_t e);
    logic [PKG_W-1:0] p;
    p = '0;
    p[127:124] = PT_ENERGY_RAW;
    p[123:120] = mod_id;
    p[119:118] = blk_id;
    p[117:108] = e.cid;
    p[107:89]  = e.esum;
    return p;
  endfunction

  // Histogram readout: eight consecutive counters starting at a multiple of 8.
  function automatic logic [PKG_W-1:0] make_hist(pkg_type_e t, logic [3:0] mod_id,
                                                 logic [1:0] blk_id, logic [17:0] start_addr,
                                                 logic full,
                                                 logic [HIST_PER_PKG-1:0][HCNT_W-1:0] cnt);
    logic [PKG_W-1:0] p;
    p = '0;
    p[127:124] = t;
    p[123:120] = mod_id;
    p[119:118] = blk_id;
    p[117:100] = start_addr;
    p[99]      = full;
    p[79:0]    = cnt;
    return p;
  endfunction

endpackage
