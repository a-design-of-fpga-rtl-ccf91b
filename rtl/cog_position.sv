// cog_position: centre-of-gravity raw position and depth of interaction for
// a dual-ended readout block (SiPM arrays on both crystal ends).
//   x   = 0.5 * ((A1+D1)/(A1+B1+C1+D1) + (A2+D2)/(A2+B2+C2+D2))
//   y   = 0.5 * ((A1+B1)/(A1+B1+C1+D1) + (C2+D2)/(A2+B2+C2+D2))
//   DOI = (A1+B1+C1+D1) / (all eight)
// These formulas and the 9-bit x, 9-bit y and 4-bit DOI are those of the
// source design. Fixed-point scaling is this design's choice: each fraction
// f is computed as floor(512 f) by a pipelined divider (saturating at 511),
// x = (fx1 + fx2) >> 1 and y likewise, and DOI = floor(16 f).
// Timing: one cycle of partial sums, COORD_W divider stages, one output
// stage: latency COORD_W + 2 = 11 cycles, one event per cycle.
// The event record travels alongside, with x, y and doi filled in.
module cog_position
  import spu_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   in_valid,
  input  event_t in_ev,
  output logic   out_valid,
  output event_t out_ev
);
  localparam int DW  = ESUM_W;
  localparam int LAT = COORD_W + 2;

  logic          v1;
  logic [DW-1:0] nx1, nx2, ny1, ny2, s1, s2, st;

  always_ff @(posedge clk) begin
    if (rst) v1 <= 1'b0;
    else     v1 <= in_valid;
    nx1 <= DW'(in_ev.area[0]) + DW'(in_ev.area[3]);  // A1 + D1
    nx2 <= DW'(in_ev.area[4]) + DW'(in_ev.area[7]);  // A2 + D2
    ny1 <= DW'(in_ev.area[0]) + DW'(in_ev.area[1]);  // A1 + B1
    ny2 <= DW'(in_ev.area[6]) + DW'(in_ev.area[7]);  // C2 + D2
    s1  <= DW'(in_ev.area[0]) + DW'(in_ev.area[1]) + DW'(in_ev.area[2]) + DW'(in_ev.area[3]);
    s2  <= DW'(in_ev.area[4]) + DW'(in_ev.area[5]) + DW'(in_ev.area[6]) + DW'(in_ev.area[7]);
    st  <= DW'(in_ev.area[0]) + DW'(in_ev.area[1]) + DW'(in_ev.area[2]) + DW'(in_ev.area[3])
         + DW'(in_ev.area[4]) + DW'(in_ev.area[5]) + DW'(in_ev.area[6]) + DW'(in_ev.area[7]);
  end

  logic [COORD_W-1:0] qx1, qx2, qy1, qy2, qd;
  logic               dv;
  frac_div #(.DW(DW), .QW(COORD_W)) u_dx1 (.clk, .rst, .in_valid(v1), .num(nx1), .den(s1), .out_valid(dv), .quo(qx1));
  frac_div #(.DW(DW), .QW(COORD_W)) u_dx2 (.clk, .rst, .in_valid(v1), .num(nx2), .den(s2), .out_valid(),   .quo(qx2));
  frac_div #(.DW(DW), .QW(COORD_W)) u_dy1 (.clk, .rst, .in_valid(v1), .num(ny1), .den(s1), .out_valid(),   .quo(qy1));
  frac_div #(.DW(DW), .QW(COORD_W)) u_dy2 (.clk, .rst, .in_valid(v1), .num(ny2), .den(s2), .out_valid(),   .quo(qy2));
  frac_div #(.DW(DW), .QW(COORD_W)) u_dz  (.clk, .rst, .in_valid(v1), .num(s1),  .den(st), .out_valid(),   .quo(qd));

  // event record delay line matching the divider latency
  event_t dly [LAT-1];
  always_ff @(posedge clk) begin
    dly[0] <= in_ev;
    for (int i = 1; i < LAT - 1; i++) dly[i] <= dly[i-1];
  end

  logic [COORD_W:0] sx, sy;
  assign sx = {1'b0, qx1} + {1'b0, qx2};
  assign sy = {1'b0, qy1} + {1'b0, qy2};

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= dv;
    out_ev     <= dly[LAT-2];
    out_ev.x   <= sx[COORD_W:1];
    out_ev.y   <= sy[COORD_W:1];
    out_ev.doi <= qd[COORD_W-1 -: DOI_W];
  end
endmodule
