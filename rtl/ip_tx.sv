// ip_tx: network-layer transmit stage. It prepends a 20-byte IPv4 header to
// each UDP datagram: version 4, header length 5, total length = datagram
// length + 20, an identification that counts datagrams, don't-fragment,
// TTL 64, protocol 17 (UDP), the header checksum (ones'-complement sum of
// the header's 16-bit words) and the source and destination addresses.
// Options, fragmentation and ARP are left out, in line with the source
// design's reduced stack; the field values are this design's choice.
// Timing: 20 header cycles, then the datagram at one byte per cycle.
module ip_tx (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] src_ip,
  input  logic [31:0] dst_ip,
  input  logic [7:0]  in_data,
  input  logic        in_valid,
  input  logic        in_last,
  output logic        in_ready,
  input  logic [15:0] in_len,
  output logic [7:0]  out_data,
  output logic        out_valid,
  output logic        out_last,
  input  logic        out_ready,
  output logic [15:0] out_len
);
  logic [15:0]  ident;
  logic [15:0]  tot;
  logic [159:0] h0, hdr;
  logic [19:0]  acc;
  logic [15:0]  fold, csum;
  logic         sof;

  assign tot = in_len + 16'd20;
  assign h0  = {8'h45, 8'h00, tot, ident, 16'h4000, 8'd64, 8'd17, 16'h0000, src_ip, dst_ip};
  always_comb begin
    acc = '0;
    for (int i = 0; i < 10; i++) acc = acc + 20'(h0[i*16 +: 16]);
    fold = acc[15:0] + 16'(acc[19:16]);
    if (fold < 16'(acc[19:16])) fold = fold + 16'd1;   // end-around carry
    csum = ~fold;
    hdr  = h0;
    hdr[79:64] = csum;
  end

  always_ff @(posedge clk) begin
    if (rst)      ident <= '0;
    else if (sof) ident <= ident + 1'b1;
  end

  hdr_prepend #(.HB(20)) u_hdr (.clk, .rst, .hdr, .in_len, .in_data, .in_valid, .in_last,
    .in_ready, .out_data, .out_valid, .out_last, .out_ready, .out_len, .sof);
endmodule
