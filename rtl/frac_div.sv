// frac_div: pipelined restoring divider for a fraction num/den with
// num <= den. It returns floor(num * 2^QW / den), saturating at 2^QW - 1
// when num == den (and when den == 0). One quotient bit is produced per
// pipeline stage, so a new division can start every cycle and the result
// appears QW cycles after in_valid. Helper of the centre-of-gravity unit;
// the pipelined form is this design's choice.
module frac_div #(
  parameter int DW = 19,
  parameter int QW = 9
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  input  logic [DW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          out_valid,
  output logic [QW-1:0] quo
);
  logic [QW-1:0]  v;
  logic [DW:0]    rem [QW];
  logic [DW-1:0]  dd  [QW];
  logic [QW-1:0]  q   [QW];

  always_ff @(posedge clk) begin
    if (rst) v <= '0;
    else     v <= {v[QW-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    for (int s = 0; s < QW; s++) begin
      logic [DW+1:0] r2;
      logic [DW:0]   rin;
      logic [QW-1:0] qin;
      logic [DW-1:0] din;
      rin = (s == 0) ? {1'b0, num} : rem[s-1];
      qin = (s == 0) ? '0 : q[s-1];
      din = (s == 0) ? den : dd[s-1];
      r2  = {rin, 1'b0};
      if (r2 >= {2'b00, din}) begin
        rem[s] <= (DW+1)'(r2 - {2'b00, din});
        q[s]   <= {qin[QW-2:0], 1'b1};
      end else begin
        rem[s] <= r2[DW:0];
        q[s]   <= {qin[QW-2:0], 1'b0};
      end
      dd[s] <= din;
    end
  end

  assign out_valid = v[QW-1];
  assign quo       = q[QW-1];
endmodule
