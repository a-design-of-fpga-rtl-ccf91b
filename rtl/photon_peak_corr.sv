// photon_peak_corr: per-crystal photo-peak correction. The summed energy of
// an event is multiplied by a gain looked up by crystal ID so that the
// 511 keV photo peak of every crystal lands on the same value (511 in the
// corrected scale, i.e. one unit per keV). The per-crystal correction
// follows the source design; the multiplicative form, the unsigned gain
// with GAIN_FRAC=20 fraction bits in GAIN_W=28 bits (0.06 Mb for four
// tables, as the source states) and saturation to 16 bits are this
// design's choices.
// Timing: table read, then multiply-and-saturate registered: latency 2,
// one event per cycle. cfg_we writes entry cfg_addr (crystal ID - 1).
module photon_peak_corr
  import spu_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  input  event_t            in_ev,
  output logic              out_valid,
  output event_t            out_ev,
  input  logic              cfg_we,
  input  logic [CID_W-1:0]  cfg_addr,
  input  logic [GAIN_W-1:0] cfg_data
);
  logic [GAIN_W-1:0] lut [N_CRYSTALS];
  logic [GAIN_W-1:0] gain_q;
  logic              v1;
  event_t            ev1;
  logic [CID_W-1:0]  idx;
  logic [ESUM_W+GAIN_W-1:0] prod;
  logic [ESUM_W+GAIN_W-GAIN_FRAC-1:0] scaled;

  assign idx    = (in_ev.cid != 0 && in_ev.cid <= CID_W'(N_CRYSTALS)) ? in_ev.cid - 1'b1 : '0;
  assign prod   = (ESUM_W+GAIN_W)'(ev1.esum) * (ESUM_W+GAIN_W)'(gain_q);
  assign scaled = prod[ESUM_W+GAIN_W-1:GAIN_FRAC];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_addr < CID_W'(N_CRYSTALS)) lut[cfg_addr] <= cfg_data;
    gain_q <= lut[idx];
    ev1    <= in_ev;
    if (rst) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
    out_ev       <= ev1;
    out_ev.ecorr <= (scaled > (1 << ECORR_W) - 1) ? '1 : ECORR_W'(scaled);
  end
endmodule
