// hdr_prepend: byte-stream header inserter shared by the UDP, IP and MAC
// transmit stages. When the first payload byte of a frame is offered it
// latches the HB-byte header hdr (most significant byte first on the
// wire), sends it while holding the payload back, then passes the payload
// through unchanged up to and including the byte marked in_last.
// Streams are valid/ready byte streams with a last marker; a byte moves
// when valid and ready are both high. One byte per cycle, no bubbles after
// the header. in_len (payload length) is latched with the header and
// presented on out_len = in_len + HB for the next stage.
module hdr_prepend #(
  parameter int HB = 8
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [HB*8-1:0] hdr,
  input  logic [15:0]   in_len,
  input  logic [7:0]    in_data,
  input  logic          in_valid,
  input  logic          in_last,
  output logic          in_ready,
  output logic [7:0]    out_data,
  output logic          out_valid,
  output logic          out_last,
  input  logic          out_ready,
  output logic [15:0]   out_len,
  output logic          sof            // pulses when a frame's header is latched
);
  typedef enum logic [1:0] {P_IDLE, P_HDR, P_PAY} st_e;
  st_e st;
  logic [HB*8-1:0]        h;
  logic [$clog2(HB+1)-1:0] cnt;

  assign sof = st == P_IDLE && in_valid;

  always_comb begin
    unique case (st)
      P_HDR: begin
        out_data  = h[HB*8-1 -: 8];
        out_valid = 1'b1;
        out_last  = 1'b0;
        in_ready  = 1'b0;
      end
      P_PAY: begin
        out_data  = in_data;
        out_valid = in_valid;
        out_last  = in_last;
        in_ready  = out_ready;
      end
      default: begin
        out_data  = '0;
        out_valid = 1'b0;
        out_last  = 1'b0;
        in_ready  = 1'b0;
      end
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st      <= P_IDLE;
      cnt     <= '0;
      h       <= '0;
      out_len <= '0;
    end else begin
      unique case (st)
        P_IDLE: if (in_valid) begin
          h       <= hdr;
          out_len <= in_len + 16'(HB);
          cnt     <= '0;
          st      <= P_HDR;
        end
        P_HDR: if (out_ready) begin
          h   <= h << 8;
          cnt <= cnt + 1'b1;
          if (cnt == ($bits(cnt))'(HB - 1)) st <= P_PAY;
        end
        P_PAY: if (in_valid && out_ready && in_last) st <= P_IDLE;
        default: st <= P_IDLE;
      endcase
    end
  end
endmodule
