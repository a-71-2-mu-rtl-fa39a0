// ctrl_reg: the 32-bit control register.
//
// Written as one 32-bit word from the internal bus. Layout (this design's
// own; the publication gives only the register's width):
//   [0]     start          command: leave Start, load the instruction
//   [1]     weights_done   command: all weights are in the buffers
//   [2]     stop           command: return to Start after the current frame
//   [3]     two_ts         1: two time steps, 0: one time step
//   [6:4]   beta_sh0       layer 0 decay, beta = 2^-beta_sh0
//   [9:7]   beta_sh1       layer 1 decay
//   [13:10] vth_exp0       layer 0 threshold, Vth = 2^vth_exp0
//   [17:14] vth_exp1       layer 1 threshold
// Command bits are not stored; they give one-cycle pulses the cycle after
// the write. Configuration bits are stored and read back on rdata at the
// same positions; the other read bits are status:
//   [0]     running        the state machine has left Start
//   [1]     weights_open   weight buffers accept loads
//   [2]     in_full        the in buffer holds a frame not yet consumed
//   [31:18] frames         frames completed since reset (wraps)
// Write bits [31:18] are ignored (verilator reports them unused; they are
// left reserved for later fields).
module ctrl_reg
  import rsnn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  input  logic        st_running,
  input  logic        st_wload,
  input  logic        st_in_full,
  input  logic        frame_done,
  output cfg_t        cfg,
  output logic        cmd_start,
  output logic        cmd_wdone,
  output logic        cmd_stop
);

  logic [13:0] frames;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frames    <= '0;
      cfg       <= '0;
      cmd_start <= 1'b0;
      cmd_wdone <= 1'b0;
      cmd_stop  <= 1'b0;
    end else begin
      cmd_start <= we & wdata[0];
      cmd_wdone <= we & wdata[1];
      cmd_stop  <= we & wdata[2];
      if (frame_done) frames <= frames + 1'b1;
      if (we) begin
        cfg.two_ts   <= wdata[3];
        cfg.beta_sh0 <= wdata[6:4];
        cfg.beta_sh1 <= wdata[9:7];
        cfg.vth_exp0 <= wdata[13:10];
        cfg.vth_exp1 <= wdata[17:14];
      end
    end
  end

  assign rdata = {frames, cfg.vth_exp1, cfg.vth_exp0, cfg.beta_sh1,
                  cfg.beta_sh0, cfg.two_ts, st_in_full, st_wload, st_running};

endmodule
