// hdr_strip: byte-stream header remover shared by the MAC, IP and UDP
// receive stages. The first HB bytes of each frame are shifted into hdr
// (first byte ends up most significant). After the last header byte the
// parent checks hdr combinationally and drives hdr_ok; a frame whose header
// fails is dropped to its last byte. Otherwise the payload is forwarded.
// With USE_LEN=1 only pay_len bytes are forwarded (pay_len is decoded from
// hdr by the parent; this trims Ethernet padding) and out_last marks the
// last of them; the remainder of the frame is discarded. With USE_LEN=0 the
// whole rest of the frame is forwarded. A frame that ends inside its
// header is discarded. The receive path has no back-pressure (in_valid
// bytes are always accepted), like the Ethernet MAC feeding it.
module hdr_strip #(
  parameter int HB      = 14,
  parameter bit USE_LEN = 1'b0
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [7:0]      in_data,
  input  logic            in_valid,
  input  logic            in_last,
  output logic [HB*8-1:0] hdr,
  input  logic            hdr_ok,
  input  logic [15:0]     pay_len,
  output logic [7:0]      out_data,
  output logic            out_valid,
  output logic            out_last,
  output logic            frame_ok,    // pulses when a header passes
  output logic            frame_bad    // pulses when a header fails
);
  typedef enum logic [1:0] {R_HDR, R_CHK, R_PAY, R_DROP} st_e;
  st_e st;
  logic [$clog2(HB+1)-1:0] cnt;
  logic [15:0]             pcnt;
  logic                    pass;

  // R_CHK lasts one cycle after the header so hdr_ok sees all of it; the
  // byte arriving in that cycle is handled like any payload byte.
  logic                    first_ok;
  assign first_ok = (st == R_CHK) && hdr_ok && (!USE_LEN || pay_len != 0);
  assign pass = in_valid && ((st == R_PAY) || first_ok);

  always_comb begin
    out_data  = in_data;
    out_valid = pass;
    if (USE_LEN) out_last = pass && (pcnt == pay_len - 16'd1 || in_last);
    else         out_last = pass && in_last;
  end

  always_ff @(posedge clk) begin
    frame_ok  <= 1'b0;
    frame_bad <= 1'b0;
    if (rst) begin
      st   <= R_HDR;
      cnt  <= '0;
      pcnt <= '0;
      hdr  <= '0;
    end else begin
      unique case (st)
        R_HDR: if (in_valid) begin
          hdr <= {hdr[HB*8-9:0], in_data};
          cnt <= cnt + 1'b1;
          if (in_last) cnt <= '0;
          else if (cnt == ($bits(cnt))'(HB - 1)) begin
            st   <= R_CHK;
            pcnt <= '0;
          end
        end
        R_CHK: begin
          cnt  <= '0;
          if (hdr_ok && (!USE_LEN || pay_len != 0)) begin
            frame_ok <= 1'b1;
            st       <= R_PAY;
            if (in_valid) begin
              pcnt <= 16'd1;
              if (out_last) st <= in_last ? R_HDR : R_DROP;
            end
          end else begin
            frame_bad <= 1'b1;
            st        <= (in_valid && in_last) ? R_HDR : R_DROP;
          end
        end
        R_PAY: if (in_valid) begin
          pcnt <= pcnt + 1'b1;
          if (in_last)       st <= R_HDR;
          else if (out_last) st <= R_DROP;
        end
        R_DROP: if (in_valid && in_last) st <= R_HDR;
        default: st <= R_HDR;
      endcase
    end
  end
endmodule
