// ip_rx: network-layer receive stage. It accepts IPv4 packets with a
// 20-byte header (no options), protocol 17 (UDP), addressed to this unit
// and with a correct header checksum, strips the header and forwards
// exactly total-length - 20 bytes (dropping Ethernet padding). Anything
// else is dropped; fragments are not reassembled. The checks are this
// design's choice within the source design's reduced stack.
// Interface: in_* is the byte stream from mac_rx; out_* carries the UDP
// datagram with out_last on its final byte; frame_bad pulses once per
// rejected packet. No back-pressure.
// Timing: the 20 header bytes are absorbed and checked in the cycle after
// the last of them; payload bytes then follow the input one cycle later.
module ip_rx (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] my_ip,
  input  logic [7:0]  in_data,
  input  logic        in_valid,
  input  logic        in_last,
  output logic [7:0]  out_data,
  output logic        out_valid,
  output logic        out_last,
  output logic        frame_bad
);
  logic [159:0] hdr;
  logic [19:0]  acc;
  logic [15:0]  fold;
  logic         ok;
  always_comb begin
    acc = '0;
    for (int i = 0; i < 10; i++) acc = acc + 20'(hdr[i*16 +: 16]);
    fold = acc[15:0] + 16'(acc[19:16]);
    if (fold < 16'(acc[19:16])) fold = fold + 16'd1;
    ok = hdr[159:152] == 8'h45 && hdr[87:80] == 8'd17 && hdr[31:0] == my_ip && fold == 16'hFFFF
         && hdr[143:128] > 16'd20;
  end
  hdr_strip #(.HB(20), .USE_LEN(1'b1)) u_strip (.clk, .rst, .in_data, .in_valid, .in_last, .hdr,
    .hdr_ok(ok), .pay_len(hdr[143:128] - 16'd20), .out_data, .out_valid, .out_last,
    .frame_ok(), .frame_bad);
endmodule
