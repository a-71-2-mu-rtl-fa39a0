// tb_weight_sram: self-checking test of the full-size 960 x 512 weight
// buffer. Rows are written quarter by quarter with random masks, then read
// back; the data must appear exactly one cycle after the read and hold
// while the buffer is idle.
module tb_weight_sram;
  import rsnn_pkg::*;
  localparam int DEPTH = 960;
  logic clk = 0, rst_n = 0, en = 0, we = 0;
  logic [9:0] addr = 0;
  logic [3:0] wmask = 0;
  logic [511:0] wdata = '0, rdata;
  logic [511:0] model [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  weight_sram #(.DEPTH(DEPTH), .WIDTH(512)) dut (.clk, .en, .we, .addr, .wmask, .wdata, .rdata);
  function automatic logic [511:0] rnd();
    logic [511:0] v;
    for (int k = 0; k < 16; k++) v[32*k +: 32] = $urandom;
    return v;
  endfunction
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < DEPTH; r++) begin
      @(negedge clk); en = 1; we = 1; addr = 10'(r); wmask = 4'hF; wdata = rnd(); model[r] = wdata;
    end
    for (int k = 0; k < 300; k++) begin
      @(negedge clk); en = 1; we = 1; addr = 10'($urandom_range(DEPTH - 1)); wmask = 4'($urandom); wdata = rnd();
      for (int q = 0; q < 4; q++) if (wmask[q]) model[addr][128*q +: 128] = wdata[128*q +: 128];
    end
    for (int k = 0; k < 2000; k++) begin
      int r;
      r = $urandom_range(DEPTH - 1);
      @(negedge clk); en = 1; we = 0; addr = 10'(r);
      @(negedge clk); en = 0; addr = 10'($urandom);
      checks++;
      if (rdata !== model[r]) begin failures++; if (failures < 5) $display("FAIL row %0d", r); end
      @(negedge clk);
      checks++;
      if (rdata !== model[r]) begin failures++; if (failures < 5) $display("FAIL row %0d not held", r); end
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
