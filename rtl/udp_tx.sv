// udp_tx: transport-layer transmit stage. It packs 16-byte packages from
// the readout multiplexer into UDP datagrams of PKGS_PER_DGRAM packages
// (128 bytes at the default) and prepends the 8-byte UDP header
// (source port, destination port, length, checksum 0 = unused, which IPv4
// allows). A datagram starts with the first waiting package; if a later
// slot finds no package within FLUSH_WAIT cycles an all-zero fill package
// (type PT_FILL) is sent in its place, so datagrams have a fixed length and
// a lone event is not held back. Packages go out most significant byte
// first. The UDP framing follows the source design; fixed-size datagrams,
// fill packages and the zero checksum are this design's simplifications.
// Timing: 16 cycles per package at one byte per cycle (1 Gb/s at 125 MHz);
// a datagram of waiting packages streams without gaps (8 + 128 cycles).
module udp_tx
  import spu_pkg::*;
#(
  parameter int PKGS_PER_DGRAM = 8,
  parameter int FLUSH_WAIT     = 256
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [15:0]      src_port,
  input  logic [15:0]      dst_port,
  input  logic             pkg_valid,
  input  logic [PKG_W-1:0] pkg,
  output logic             pkg_ready,
  output logic [7:0]       out_data,
  output logic             out_valid,
  output logic             out_last,
  input  logic             out_ready,
  output logic [15:0]      out_len,
  output logic             fill_sent
);
  localparam int PAY = PKGS_PER_DGRAM * PKG_W / 8;

  typedef enum logic [1:0] {K_IDLE, K_SEND, K_NEXT} st_e;
  st_e st;
  logic [PKG_W-1:0] sh;
  logic [3:0]       bcnt;
  logic [$clog2(PKGS_PER_DGRAM+1)-1:0] slot;
  logic [$clog2(FLUSH_WAIT+1)-1:0]     wait_cnt;
  logic             b_valid, b_last, b_ready;

  assign b_valid   = st == K_SEND;
  assign b_last    = st == K_SEND && bcnt == 4'hF && slot == ($bits(slot))'(PKGS_PER_DGRAM - 1);
  // the next package is taken in the cycle the last byte of the current one
  // leaves, so a datagram streams without gaps when packages are waiting
  assign pkg_ready = st == K_IDLE || st == K_NEXT ||
                     (st == K_SEND && bcnt == 4'hF && b_ready && !b_last);

  always_ff @(posedge clk) begin
    fill_sent <= 1'b0;
    if (rst) begin
      st       <= K_IDLE;
      bcnt     <= '0;
      slot     <= '0;
      wait_cnt <= '0;
      sh       <= '0;
    end else begin
      unique case (st)
        K_IDLE: if (pkg_valid) begin
          sh   <= pkg;
          slot <= '0;
          bcnt <= '0;
          st   <= K_SEND;
        end
        K_SEND: if (b_ready) begin
          sh   <= sh << 8;
          bcnt <= bcnt + 1'b1;
          if (bcnt == 4'hF) begin
            wait_cnt <= '0;
            if (b_last) st <= K_IDLE;
            else begin
              slot <= slot + 1'b1;
              if (pkg_valid) sh <= pkg;
              else           st <= K_NEXT;
            end
          end
        end
        K_NEXT: begin
          if (pkg_valid) begin
            sh <= pkg;
            st <= K_SEND;
          end else if (wait_cnt == ($bits(wait_cnt))'(FLUSH_WAIT)) begin
            sh        <= '0;      // PT_FILL package
            fill_sent <= 1'b1;
            st        <= K_SEND;
          end else begin
            wait_cnt <= wait_cnt + 1'b1;
          end
        end
        default: st <= K_IDLE;
      endcase
    end
  end

  hdr_prepend #(.HB(8)) u_hdr (.clk, .rst,
    .hdr({src_port, dst_port, 16'(PAY + 8), 16'h0000}), .in_len(16'(PAY)),
    .in_data(sh[PKG_W-1 -: 8]), .in_valid(b_valid), .in_last(b_last), .in_ready(b_ready),
    .out_data, .out_valid, .out_last, .out_ready, .out_len, .sof());
endmodule
