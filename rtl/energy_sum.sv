// energy_sum: the summing node of one detector block. It adds the eight
// area values (A1..D1 of one SiPM layer, A2..D2 of the other) into the
// uncorrected event energy, the input of both the photo-peak correction and
// the energy-spectrum histogram. The sum is formed in a two-level adder
// tree registered once (latency 1 cycle, one event per cycle); the event
// record is carried along with esum filled in. The sum itself follows the
// source design; the single pipeline stage is this design's choice.
module energy_sum
  import spu_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   in_valid,
  input  event_t in_ev,
  output logic   out_valid,
  output event_t out_ev
);
  logic [ESUM_W-1:0] s1, s2;
  always_comb begin
    s1 = ESUM_W'(in_ev.area[0]) + ESUM_W'(in_ev.area[1]) + ESUM_W'(in_ev.area[2]) + ESUM_W'(in_ev.area[3]);
    s2 = ESUM_W'(in_ev.area[4]) + ESUM_W'(in_ev.area[5]) + ESUM_W'(in_ev.area[6]) + ESUM_W'(in_ev.area[7]);
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
    out_ev      <= in_ev;
    out_ev.esum <= s1 + s2;
  end
endmodule
