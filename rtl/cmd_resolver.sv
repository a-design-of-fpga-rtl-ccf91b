// cmd_resolver: command resolution, mode selection and LUT / parameter
// configuration. The host's UDP payload is a sequence of 8-byte command
// words (most significant byte first), laid out as cmd_t:
//   [63:56] opcode  [55:54] block  [53:32] address  [31:0] data
// Opcodes (spu_pkg): SET_MODE (mode, online/offline sub-mode), HIST_START/
// STOP/READ (data[3:0] = block mask), WR_XB / WR_YB (one boundary of a
// boundary CLT, address = {row, index}), WR_TOFF / WR_GAIN (one crystal's
// time offset or gain), SET_EWIN (energy window), SET_ESHIFT (energy bin
// scale), SET_MODID (module ID stamped into packages). Unknown opcodes and
// a trailing partial word are ignored.
// That modes, histogram control and LUTs are set by host commands over the
// same Ethernet link follows the source design; the command format and
// opcode values are this design's own.
// Timing: a command takes effect one cycle after its eighth byte; control
// pulses (hist_*, cfg_we) last one cycle.
module cmd_resolver
  import spu_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic [7:0]         in_data,
  input  logic               in_valid,
  input  logic               in_last,
  output mode_e              mode,
  output logic               online,
  output logic [3:0]         mod_id,
  output logic [ECORR_W-1:0] win_lo,
  output logic [ECORR_W-1:0] win_hi,
  output logic [4:0]         eshift,
  output logic [3:0]         hist_start,
  output logic [3:0]         hist_stop,
  output logic [3:0]         hist_read,
  output logic               cfg_we,
  output logic [1:0]         cfg_blk,
  output cfg_target_e        cfg_target,
  output logic [21:0]        cfg_addr,
  output logic [31:0]        cfg_data,
  output logic [15:0]        cmd_cnt
);
  logic [55:0] sh;
  logic [2:0]  bcnt;
  logic        word_done;
  cmd_t        c;

  assign word_done = in_valid && bcnt == 3'd7;
  assign c         = cmd_t'({sh, in_data});

  always_ff @(posedge clk) begin
    hist_start <= '0;
    hist_stop  <= '0;
    hist_read  <= '0;
    cfg_we     <= 1'b0;
    if (rst) begin
      sh      <= '0;
      bcnt    <= '0;
      mode    <= MODE_REGULAR;
      online  <= 1'b0;
      mod_id  <= '0;
      win_lo  <= '0;
      win_hi  <= '1;
      eshift  <= '0;
      cmd_cnt <= '0;
      cfg_blk    <= '0;
      cfg_target <= CFG_CLT_XB;
      cfg_addr   <= '0;
      cfg_data   <= '0;
    end else begin
      if (in_valid) begin
        sh   <= {sh[47:0], in_data};
        bcnt <= in_last ? 3'd0 : bcnt + 1'b1;
      end
      if (word_done) begin
        cmd_cnt  <= cmd_cnt + 1'b1;
        cfg_blk  <= c.blk;
        cfg_addr <= c.addr;
        cfg_data <= c.data;
        unique case (c.opcode)
          OP_SET_MODE: begin
            mode   <= (c.data[1:0] == 2'd1) ? MODE_FLOOD :
                      (c.data[1:0] == 2'd2) ? MODE_ENERGY : MODE_REGULAR;
            online <= c.data[2];
          end
          OP_HIST_START: hist_start <= c.data[3:0];
          OP_HIST_STOP:  hist_stop  <= c.data[3:0];
          OP_HIST_READ:  hist_read  <= c.data[3:0];
          OP_WR_XB:      begin cfg_we <= 1'b1; cfg_target <= CFG_CLT_XB; end
          OP_WR_YB:      begin cfg_we <= 1'b1; cfg_target <= CFG_CLT_YB; end
          OP_WR_TOFF:    begin cfg_we <= 1'b1; cfg_target <= CFG_TOFF;   end
          OP_WR_GAIN:    begin cfg_we <= 1'b1; cfg_target <= CFG_GAIN;   end
          OP_SET_EWIN:   begin win_lo <= c.data[15:0]; win_hi <= c.data[31:16]; end
          OP_SET_ESHIFT: eshift <= c.data[4:0];
          OP_SET_MODID:  mod_id <= c.data[3:0];
          default: ;
        endcase
      end
    end
  end
endmodule
