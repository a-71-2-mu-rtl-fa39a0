// tb_ctrl_reg: self-checking test of the 32-bit control register: random
// words are written; configuration fields must be decoded and read back,
// status inputs and the completed-frame count must appear on the read
// word, and the three command bits must give one-cycle pulses the cycle after
// the write and nothing otherwise.
module tb_ctrl_reg;
  import rsnn_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  logic st_running = 0, st_wload = 0, st_in_full = 0, frame_done = 0;
  int frames = 0;
  logic [31:0] wdata = '0, rdata;
  cfg_t cfg;
  logic cmd_start, cmd_wdone, cmd_stop;
  int checks = 0, failures = 0;
  logic [31:0] last_w = '0;
  always #5 clk = ~clk;
  ctrl_reg dut (.*);
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      we = ($urandom_range(1) == 0);
      st_running = 1'($urandom); st_wload = 1'($urandom); st_in_full = 1'($urandom);
      frame_done = ($urandom_range(3) == 0);
      if (frame_done) frames++;
      wdata = $urandom;
      if (we) last_w = wdata;
      @(negedge clk);
      frame_done = 0;
      checks++;
      if (cmd_start !== (we & wdata[0]) || cmd_wdone !== (we & wdata[1]) || cmd_stop !== (we & wdata[2])) begin
        failures++; $display("FAIL command pulses k=%0d", k);
      end
      checks++;
      if (cfg.two_ts !== last_w[3] || cfg.beta_sh0 !== last_w[6:4] || cfg.beta_sh1 !== last_w[9:7] ||
          cfg.vth_exp0 !== last_w[13:10] || cfg.vth_exp1 !== last_w[17:14] ||
          rdata !== {14'(frames), last_w[17:3], st_in_full, st_wload, st_running}) begin
        failures++; $display("FAIL configuration k=%0d", k);
      end
      we = 0;
      @(negedge clk);
      frame_done = 0;
      checks++;
      if (cmd_start || cmd_wdone || cmd_stop) begin failures++; $display("FAIL pulse held k=%0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
