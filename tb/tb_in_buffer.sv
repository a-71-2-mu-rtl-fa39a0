// tb_in_buffer: self-checking test of the input feature buffer. Several
// frames of 40 random bytes are written as three 128-bit beats; the bench
// checks that full rises only after the beat with the last feature, that
// writes are refused while full, that every byte reads back, and that
// consume frees the buffer for the next frame.
module tb_in_buffer;
  import rsnn_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0, consume = 0;
  logic [1:0] wr_beat = 0;
  logic [127:0] wr_data = '0;
  logic wr_ready, full;
  logic [5:0] rd_idx = 0;
  logic [7:0] rd_data;
  logic [7:0] frame [48];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  in_buffer dut (.*);
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 5; f++) begin
      foreach (frame[k]) frame[k] = 8'($urandom);
      for (int b = 0; b < 3; b++) begin
        @(negedge clk);
        checks++;
        if (!wr_ready || full) begin failures++; $display("FAIL frame %0d beat %0d: not ready", f, b); end
        wr_en = 1; wr_beat = 2'(b);
        for (int k = 0; k < 16; k++) wr_data[8*k +: 8] = frame[16*b + k];
        @(negedge clk); wr_en = 0;
        checks++;
        if (full !== (b == 2)) begin failures++; $display("FAIL frame %0d beat %0d: full=%0d", f, b, full); end
      end
      // a write while full must be ignored
      @(negedge clk); wr_en = 1; wr_beat = 0; wr_data = '1;
      @(negedge clk); wr_en = 0;
      checks++; if (wr_ready) begin failures++; $display("FAIL wr_ready while full"); end
      for (int k = 0; k < 40; k++) begin
        rd_idx = 6'(k); #1;
        checks++;
        if (rd_data !== frame[k]) begin failures++; $display("FAIL frame %0d byte %0d: %h vs %h", f, k, rd_data, frame[k]); end
      end
      @(negedge clk); consume = 1; @(negedge clk); consume = 0;
      checks++; if (full || !wr_ready) begin failures++; $display("FAIL consume did not free"); end
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
