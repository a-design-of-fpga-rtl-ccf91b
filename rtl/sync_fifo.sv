// sync_fifo: single-clock first-word-fall-through FIFO. It buffers the
// packages of one detector block ahead of the token-ring readout (the
// "block FIFOs" of the source design). A write into a full FIFO is lost and
// counted in ovf_cnt. The depth and overflow counter are design choices.
// Interface: wr_en/wr_data in; rd_valid/rd_data show the oldest word and
// rd_en pops it. Empty-to-valid latency is one cycle.
module sync_fifo #(
  parameter int W     = 128,
  parameter int DEPTH = 512
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         full,
  input  logic         rd_en,
  output logic         rd_valid,
  output logic [W-1:0] rd_data,
  output logic [$clog2(DEPTH):0] level,
  output logic [15:0]  ovf_cnt
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign full     = level == (AW+1)'(DEPTH);
  assign rd_valid = level != 0;
  assign rd_data  = mem[rp];
  assign do_wr    = wr_en && !full;
  assign do_rd    = rd_en && rd_valid;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp      <= '0;
      rp      <= '0;
      level   <= '0;
      ovf_cnt <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      level <= level + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      if (wr_en && full && ovf_cnt != '1) ovf_cnt <= ovf_cnt + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (rst) level <= (AW+1)'(DEPTH));
endmodule
