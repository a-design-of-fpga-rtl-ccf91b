// mac_rx: link-layer receive stage behind the Ethernet MAC core. It checks
// the destination address (this unit's address or broadcast) and the
// EtherType (0x0800, IPv4), strips the 14-byte header and forwards the IP
// packet; other frames are dropped. The check list is this design's
// choice within the source design's reduced stack. No back-pressure;
// payload bytes leave in the cycle they arrive.
// Interface: in_* is the MAC core's 8-bit receive stream (in_last on the
// final byte, FCS already removed); out_* carries the IP packet; frame_bad
// pulses once per rejected frame.
// Timing: the 14 header bytes are absorbed; payload bytes follow the input
// one cycle later.
module mac_rx (
  input  logic        clk,
  input  logic        rst,
  input  logic [47:0] my_mac,
  input  logic [7:0]  in_data,
  input  logic        in_valid,
  input  logic        in_last,
  output logic [7:0]  out_data,
  output logic        out_valid,
  output logic        out_last,
  output logic        frame_bad
);
  logic [111:0] hdr;
  logic         ok;
  assign ok = (hdr[111:64] == my_mac || hdr[111:64] == 48'hFFFF_FFFF_FFFF) && hdr[15:0] == 16'h0800;
  hdr_strip #(.HB(14), .USE_LEN(1'b0)) u_strip (.clk, .rst, .in_data, .in_valid, .in_last, .hdr,
    .hdr_ok(ok), .pay_len(16'd0), .out_data, .out_valid, .out_last, .frame_ok(), .frame_bad);
endmodule
