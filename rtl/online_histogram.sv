// online_histogram: on-chip flood-map and energy-spectrum histogramming for
// one detector block, sharing one 10-bit x 2^HIST_AW-word RAM (512x512 at
// the default) through an address multiplexer:
//   flood  mode: address = {raw y, raw x}
//   energy mode: address = (crystal ID - 1) * 256 + energy bin, where the
//                bin is the uncorrected energy >> eshift, clipped to 255
// Histogramming (as in the source design): a start command begins the run;
// each event's address is latched in the address register, the count at
// that address is read into the count register, incremented and written
// back. When the new count reaches 1023 (all ones, the largest 10-bit
// value) the full flag is set and the run ends; otherwise the unit waits
// for the next event. Readout: on a read command a pointer register steps
// through every address of the active histogram; counts are grouped eight
// to a package and sent out.
// This design's own choices: the RAM is cleared by a sweep on start
// (2^HIST_AW cycles, busy high); an event arriving while the previous one
// is still being added (4 cycles per event) is dropped and counted; a stop
// command ends a run; the full test is "new count == 1023" (the figure's
// "< 1023 ?" test, taken with the text's "overflow sets the flag").
module online_histogram
  import spu_pkg::*;
#(
  parameter int HIST_AW = 18
) (
  input  logic             clk,
  input  logic             rst,
  input  mode_e            mode,
  input  logic [4:0]       eshift,
  input  logic             start,
  input  logic             stop,
  input  logic             readout,
  input  logic             ev_valid,
  input  event_t           ev,
  input  logic [3:0]       mod_id,
  input  logic [1:0]       blk_id,
  output logic             pkg_valid,
  output logic [PKG_W-1:0] pkg,
  input  logic             pkg_ready,
  output logic             running,
  output logic             busy,
  output logic             full,
  output logic [15:0]      drop_cnt
);
  localparam int DEPTH = 1 << HIST_AW;
  localparam int HMAX  = (1 << HCNT_W) - 1;

  typedef enum logic [3:0] {
    S_IDLE, S_CLEAR, S_WAIT, S_RD, S_CNT, S_WR, S_RO_RD, S_RO_CAP, S_RO_EMIT
  } state_e;
  state_e state;

  logic [HCNT_W-1:0]  mem [DEPTH];
  logic [HCNT_W-1:0]  dout;
  logic [HIST_AW-1:0] addr_reg, ptr, last_addr, ev_addr;
  logic [HCNT_W-1:0]  count_reg;
  logic [HCNT_W:0]    count_inc;
  logic               we, re;
  logic [HIST_AW-1:0] waddr, raddr;
  logic [HCNT_W-1:0]  wdata;
  logic [HIST_PER_PKG-1:0][HCNT_W-1:0] grp;
  mode_e              hmode;   // mode of the histogram held in the RAM

  // address multiplexer
  logic [ESUM_W-1:0] eb_full;
  logic [EBIN_W-1:0] ebin;
  logic [CID_W-1:0]  cidx;
  always_comb begin
    eb_full = ev.esum >> eshift;
    ebin    = (eb_full > ESUM_W'((1 << EBIN_W) - 1)) ? '1 : EBIN_W'(eb_full);
    cidx    = (ev.cid != 0) ? ev.cid - 1'b1 : '0;
    if (hmode == MODE_ENERGY) ev_addr = HIST_AW'({cidx, ebin});
    else                     ev_addr = HIST_AW'({ev.y, ev.x});
    last_addr = (hmode == MODE_ENERGY) ? HIST_AW'(N_CRYSTALS * (1 << EBIN_W) - 1) : HIST_AW'(DEPTH - 1);
  end

  // RAM: one write port, one registered read port
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) dout <= mem[raddr];
  end

  assign count_inc = {1'b0, count_reg} + 1'b1;

  always_comb begin
    we    = 1'b0;
    waddr = addr_reg;
    wdata = '0;
    re    = 1'b0;
    raddr = addr_reg;
    unique case (state)
      S_CLEAR: begin we = 1'b1; waddr = ptr; wdata = '0; end
      S_RD:    begin re = 1'b1; raddr = addr_reg; end
      S_WR:    begin we = 1'b1; waddr = addr_reg; wdata = count_inc[HCNT_W-1:0]; end
      S_RO_RD: begin re = 1'b1; raddr = ptr; end
      default: ;
    endcase
  end

  assign running   = state inside {S_WAIT, S_RD, S_CNT, S_WR};
  assign busy      = state != S_IDLE;
  assign pkg_valid = state == S_RO_EMIT;
  assign pkg       = make_hist((hmode == MODE_ENERGY) ? PT_ENERGY_HIST : PT_FLOOD_HIST, mod_id,
                               blk_id, 18'(ptr - HIST_AW'(HIST_PER_PKG)), full, grp);

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      ptr      <= '0;
      addr_reg <= '0;
      full     <= 1'b0;
      drop_cnt <= '0;
      hmode    <= MODE_FLOOD;
      grp      <= '0;
    end else begin
      if (ev_valid && state != S_WAIT && running && drop_cnt != '1) drop_cnt <= drop_cnt + 1'b1;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            ptr      <= '0;
            full     <= 1'b0;
            drop_cnt <= '0;
            hmode    <= mode;
            state    <= S_CLEAR;
          end else if (readout) begin
            ptr   <= '0;
            state <= S_RO_RD;
          end
        end
        S_CLEAR: begin
          ptr <= ptr + 1'b1;
          if (ptr == HIST_AW'(DEPTH - 1)) state <= S_WAIT;
        end
        S_WAIT: begin
          if (stop) state <= S_IDLE;
          else if (ev_valid) begin
            addr_reg <= ev_addr;
            state    <= S_RD;
          end
        end
        S_RD:  state <= S_CNT;
        S_CNT: begin
          count_reg <= dout;
          state     <= S_WR;
        end
        S_WR: begin
          if (count_inc >= (HCNT_W+1)'(HMAX)) begin
            full  <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= stop ? S_IDLE : S_WAIT;
          end
        end
        S_RO_RD: state <= S_RO_CAP;
        S_RO_CAP: begin
          grp[ptr[$clog2(HIST_PER_PKG)-1:0]] <= dout;
          ptr <= ptr + 1'b1;
          if (ptr[$clog2(HIST_PER_PKG)-1:0] == '1) state <= S_RO_EMIT;
          else                                   state <= S_RO_RD;
        end
        S_RO_EMIT: begin
          if (pkg_ready) state <= (ptr - 1'b1 == last_addr) ? S_IDLE : S_RO_RD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
