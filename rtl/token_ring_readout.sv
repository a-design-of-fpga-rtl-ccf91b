// token_ring_readout: reads N block FIFOs onto one package stream by
// passing a token around a ring. Only the block holding the token may send.
// It sends while its FIFO has data, up to MAX_BURST packages, then hands
// the token to the next block; a block with an empty FIFO passes the token
// on at once (one cycle per hop). A block whose data suddenly increases
// therefore gets the link as soon as the token reaches it instead of
// waiting for a fixed time slot. The token ring follows the source design;
// the burst limit and the one-cycle hop are this design's choices.
// Interface: in_valid/in_data from FIFO heads, in_rd pops; out_valid/
// out_data/out_ready downstream (combinational path from the FIFO head).
module token_ring_readout #(
  parameter int N         = 4,
  parameter int W         = 128,
  parameter int MAX_BURST = 16
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [N-1:0]        in_valid,
  input  logic [N-1:0][W-1:0] in_data,
  output logic [N-1:0]        in_rd,
  output logic                out_valid,
  output logic [W-1:0]        out_data,
  output logic [$clog2(N)-1:0] out_src,
  input  logic                out_ready,
  output logic                token_pass
);
  localparam int TW = $clog2(N);
  logic [TW-1:0] tok;
  logic [$clog2(MAX_BURST+1)-1:0] burst;
  logic          last_of_burst;

  assign out_valid = in_valid[tok];
  assign out_data  = in_data[tok];
  assign out_src   = tok;
  always_comb begin
    in_rd      = '0;
    in_rd[tok] = out_valid && out_ready;
  end
  assign last_of_burst = out_valid && out_ready && (burst == ($bits(burst))'(MAX_BURST - 1));
  assign token_pass    = !in_valid[tok] || last_of_burst;

  always_ff @(posedge clk) begin
    if (rst) begin
      tok   <= '0;
      burst <= '0;
    end else if (token_pass) begin
      tok   <= (tok == TW'(N - 1)) ? '0 : tok + 1'b1;
      burst <= '0;
    end else if (out_valid && out_ready) begin
      burst <= burst + 1'b1;
    end
  end
endmodule
