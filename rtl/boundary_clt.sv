// boundary_clt: crystal identification with boundary crystal look-up tables.
// Instead of a 512x512 table holding a crystal ID per raw (x,y), each
// direction keeps, per raw line, the 22 positions where the crystal column
// (or row) index changes:
//   xb_mem[raw y] = 22 x-boundaries of that line (9 bits each)
//   yb_mem[raw x] = 22 y-boundaries of that column
// An event's column index is 1 + (number of x-boundaries <= x), its row
// index 1 + (number of y-boundaries <= y), and the 1-D crystal ID is
// (row-1)*23 + column, 1..529. This follows the source design (two
// 9x22-bit x 512-word RAMs, comparison then a 2-D to 1-D decoder). Counting
// boundaries (so boundaries need not be sorted) and the "<=" convention,
// taken from the worked example (8 <= x=11 < 14 gives column 2), are
// design choices where the source is not explicit.
// Timing: the RAMs are read in the cycle after in_valid; the comparison and
// decode are registered in the next: latency 2, one event per cycle.
// Configuration: cfg_we writes one 9-bit boundary (cfg_idx 0..21) of one
// row (cfg_row) of the table chosen by cfg_sel (0 = x-boundaries, 1 = y).
module boundary_clt
  import spu_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  input  event_t             in_ev,
  output logic               out_valid,
  output event_t             out_ev,
  input  logic               cfg_we,
  input  logic               cfg_sel,
  input  logic [COORD_W-1:0] cfg_row,
  input  logic [BIDX_W-1:0]  cfg_idx,
  input  logic [COORD_W-1:0] cfg_data
);
  typedef logic [N_BOUND-1:0][COORD_W-1:0] brow_t;

  brow_t xb_mem [1 << COORD_W];
  brow_t yb_mem [1 << COORD_W];
  brow_t xb_q, yb_q;

  always_ff @(posedge clk) begin
    if (cfg_we && !cfg_sel && cfg_idx < BIDX_W'(N_BOUND)) xb_mem[cfg_row][cfg_idx] <= cfg_data;
    if (cfg_we &&  cfg_sel && cfg_idx < BIDX_W'(N_BOUND)) yb_mem[cfg_row][cfg_idx] <= cfg_data;
  end

  logic   v1;
  event_t ev1;
  always_ff @(posedge clk) begin
    xb_q <= xb_mem[in_ev.y];
    yb_q <= yb_mem[in_ev.x];
    ev1  <= in_ev;
    if (rst) v1 <= 1'b0;
    else     v1 <= in_valid;
  end

  logic [BIDX_W-1:0] nx, ny;
  always_comb begin
    nx = '0;
    ny = '0;
    for (int i = 0; i < N_BOUND; i++) begin
      if (xb_q[i] <= ev1.x) nx = nx + 1'b1;
      if (yb_q[i] <= ev1.y) ny = ny + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= v1;
    out_ev     <= ev1;
    out_ev.cid <= CID_W'(ny) * CID_W'(N_1D) + CID_W'(nx) + CID_W'(1);
  end
endmodule
