// udp_rx: transport-layer receive stage. It accepts UDP datagrams for the
// command port, strips the 8-byte header and forwards length - 8 payload
// bytes to the command resolver. The checksum is not verified (the IP and
// Ethernet checks cover the link); this is this design's simplification.
// Interface: in_* is the byte stream from ip_rx (in_last on the final
// payload byte of the IP packet); out_* carries the UDP payload with
// out_last on its final byte; frame_bad pulses once per rejected datagram
// (wrong port, or shorter than its header). No back-pressure.
// Timing: header bytes are absorbed; payload bytes follow the input with a
// fixed delay of one cycle (the shared hdr_strip helper).
module udp_rx (
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] my_port,
  input  logic [7:0]  in_data,
  input  logic        in_valid,
  input  logic        in_last,
  output logic [7:0]  out_data,
  output logic        out_valid,
  output logic        out_last,
  output logic        frame_bad
);
  logic [63:0] hdr;
  logic        ok;
  assign ok = hdr[47:32] == my_port && hdr[31:16] > 16'd8;
  hdr_strip #(.HB(8), .USE_LEN(1'b1)) u_strip (.clk, .rst, .in_data, .in_valid, .in_last, .hdr,
    .hdr_ok(ok), .pay_len(hdr[31:16] - 16'd8), .out_data, .out_valid, .out_last,
    .frame_ok(), .frame_bad);
endmodule
