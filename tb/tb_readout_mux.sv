// tb_readout_mux: checks that in each mode only the matching token ring
// drives the output and receives the ready.
// How: random valid/data on the three rings and random ready from the
// uplink, in each of the three modes; the expected routing is computed in
// the testbench. Timing: combinational, checked in the same cycle. The
// mode-selected multiplexer follows the source design.
module tb_readout_mux;
  import spu_pkg::*;
  int checks = 0, failures = 0;
  mode_e mode;
  logic [2:0] in_valid, in_ready;
  logic [2:0][127:0] in_data;
  logic out_valid, out_ready;
  logic [127:0] out_data;
  readout_mux dut (.*);
  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 300; n++) begin
      int s;
      s = n % 3;
      mode = mode_e'(s);
      in_valid = 3'($urandom);
      for (int i = 0; i < 3; i++) in_data[i] = {$urandom, $urandom, $urandom, $urandom};
      out_ready = n[3];
      #1;
      checks++;
      if (out_valid != in_valid[s] || out_data != in_data[s] || in_ready != (3'(out_ready) << s)) begin
        failures++; $display("mode %0d wrong", s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
