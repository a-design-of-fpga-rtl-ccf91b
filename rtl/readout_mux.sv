// readout_mux: the mode multiplexer between the three token rings (regular
// packages, flood packages, energy-spectrum packages) and the UDP transmit
// path. The ring of the active mode drives the output and receives the
// ready; the others are held. As in the source design the mode is set by
// command from the host. A package already presented by the old ring when
// the mode changes stays in its FIFO. Purely combinational.
module readout_mux
  import spu_pkg::*;
(
  input  mode_e                  mode,
  input  logic [2:0]             in_valid,
  input  logic [2:0][PKG_W-1:0]  in_data,
  output logic [2:0]             in_ready,
  output logic                   out_valid,
  output logic [PKG_W-1:0]       out_data,
  input  logic                   out_ready
);
  logic [1:0] sel;
  assign sel = (mode == MODE_FLOOD) ? 2'd1 : (mode == MODE_ENERGY) ? 2'd2 : 2'd0;
  always_comb begin
    in_ready      = '0;
    in_ready[sel] = out_ready;
    out_valid     = in_valid[sel];
    out_data      = in_data[sel];
  end
endmodule
