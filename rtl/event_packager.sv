// event_packager: turns a processed event into the 16-byte package of the
// active mode, stamping the package type, module ID and block ID:
//   regular mode          -> PT_REGULAR   (crystal ID, DOI, energy, time)
//   flood, offline        -> PT_FLOOD_RAW (raw x, y, DOI, summed energy)
//   energy, offline       -> PT_ENERGY_RAW (crystal ID, uncorrected energy)
//   flood/energy, online  -> no package; the event goes to the on-chip
//                            histogram instead (hist_valid)
// Each package goes out on the port of its type, which feeds the block's
// FIFO of that type. The modes and the marking of type, module and block
// follow the source design; the field layout is this design's own (see
// spu_pkg). Timing: registered, latency 1, one event per cycle.
module event_packager
  import spu_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  event_t           in_ev,
  input  mode_e            mode,
  input  logic             online,
  input  logic [3:0]       mod_id,
  input  logic [1:0]       blk_id,
  output logic             reg_valid,
  output logic [PKG_W-1:0] reg_pkg,
  output logic             flood_valid,
  output logic [PKG_W-1:0] flood_pkg,
  output logic             energy_valid,
  output logic [PKG_W-1:0] energy_pkg,
  output logic             hist_valid,
  output event_t           hist_ev
);
  always_ff @(posedge clk) begin
    reg_pkg    <= make_regular(mod_id, blk_id, in_ev);
    flood_pkg  <= make_flood_raw(mod_id, blk_id, in_ev);
    energy_pkg <= make_energy_raw(mod_id, blk_id, in_ev);
    hist_ev    <= in_ev;
    if (rst) begin
      reg_valid    <= 1'b0;
      flood_valid  <= 1'b0;
      energy_valid <= 1'b0;
      hist_valid   <= 1'b0;
    end else begin
      reg_valid    <= in_valid && mode == MODE_REGULAR;
      flood_valid  <= in_valid && mode == MODE_FLOOD  && !online;
      energy_valid <= in_valid && mode == MODE_ENERGY && !online;
      hist_valid   <= in_valid && mode != MODE_REGULAR && online;
    end
  end
endmodule
