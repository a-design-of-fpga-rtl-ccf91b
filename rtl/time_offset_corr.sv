// time_offset_corr: crystal-granular timing offset correction. A 529-entry
// table holds, per crystal, a two's-complement offset that is added to the
// TDC result of each event once its crystal ID is known; this aligns the
// different delays of crystals and their electronic channels, as in the
// source design. Offset width (32 bits, which makes the four tables 0.07 Mb
// as the source states) and the wrap-around addition are design choices.
// Timing: table read in the first cycle, addition registered in the second:
// latency 2, one event per cycle. cfg_we writes entry cfg_addr (crystal
// ID - 1).
module time_offset_corr
  import spu_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  event_t           in_ev,
  output logic             out_valid,
  output event_t           out_ev,
  input  logic             cfg_we,
  input  logic [CID_W-1:0] cfg_addr,
  input  logic [TDC_W-1:0] cfg_data
);
  logic [TDC_W-1:0] lut [N_CRYSTALS];
  logic [TDC_W-1:0] off_q;
  logic             v1;
  event_t           ev1;
  logic [CID_W-1:0] idx;

  assign idx = (in_ev.cid != 0 && in_ev.cid <= CID_W'(N_CRYSTALS)) ? in_ev.cid - 1'b1 : '0;

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_addr < CID_W'(N_CRYSTALS)) lut[cfg_addr] <= cfg_data;
    off_q <= lut[idx];
    ev1   <= in_ev;
    if (rst) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
    out_ev       <= ev1;
    out_ev.tcorr <= ev1.tdc + off_q;
  end
endmodule
