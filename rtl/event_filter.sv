// event_filter: energy-window event filter. In regular package mode an
// event is kept only if its corrected energy lies inside [win_lo, win_hi];
// this removes electronic noise and Compton-scattered events before
// packaging, as in the source design. With bypass set (flood and energy
// spectrum modes, which need every event) all events pass. The inclusive
// window bounds and the bypass are this design's choices.
// Timing: registered, latency 1. drop pulses for each rejected event.
module event_filter
  import spu_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  input  event_t             in_ev,
  input  logic               bypass,
  input  logic [ECORR_W-1:0] win_lo,
  input  logic [ECORR_W-1:0] win_hi,
  output logic               out_valid,
  output event_t             out_ev,
  output logic               drop
);
  logic in_win;
  assign in_win = (in_ev.ecorr >= win_lo) && (in_ev.ecorr <= win_hi);

  always_ff @(posedge clk) begin
    out_ev <= in_ev;
    if (rst) begin
      out_valid <= 1'b0;
      drop      <= 1'b0;
    end else begin
      out_valid <= in_valid && (bypass || in_win);
      drop      <= in_valid && !bypass && !in_win;
    end
  end
endmodule
