// mac_tx: link-layer transmit stage in front of the Ethernet MAC core. It
// prepends the part of the Ethernet header the core does not add:
// destination address, source address and EtherType 0x0800 (IPv4).
// Preamble, frame check sequence and padding are the MAC core's job, as in
// the source design. Output is the MAC core's 8-bit transmit stream.
// Timing: 14 header cycles, then the packet at one byte per cycle.
module mac_tx (
  input  logic        clk,
  input  logic        rst,
  input  logic [47:0] src_mac,
  input  logic [47:0] dst_mac,
  input  logic [7:0]  in_data,
  input  logic        in_valid,
  input  logic        in_last,
  output logic        in_ready,
  input  logic [15:0] in_len,
  output logic [7:0]  out_data,
  output logic        out_valid,
  output logic        out_last,
  input  logic        out_ready
);
  hdr_prepend #(.HB(14)) u_hdr (.clk, .rst, .hdr({dst_mac, src_mac, 16'h0800}), .in_len,
    .in_data, .in_valid, .in_last, .in_ready, .out_data, .out_valid, .out_last, .out_ready,
    .out_len(), .sof());
endmodule
