// tb_pe_set: self-checking test of a 128-PE set: every PE must add its own
// 4-bit slice of the 512-bit row, shifted by the common shift value.
module tb_pe_set;
  import rsnn_pkg::*;
  localparam int N = 128;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [2:0] sh = 0;
  logic [N*4-1:0] wrow = '0;
  logic signed [N-1:0][11:0] acc;
  int checks = 0, failures = 0;
  int model[N];
  always #5 clk = ~clk;
  pe_set #(.N(N)) dut (.*);
  initial begin
    foreach (model[j]) model[j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      @(negedge clk);
      clr = (k == 30);
      en  = ($urandom_range(99) < 80);
      sh  = 3'($urandom_range(2));
      for (int j = 0; j < N; j++) wrow[4*j +: 4] = 4'($urandom);
      @(posedge clk); #1;
      for (int j = 0; j < N; j++) begin
        if (clr) model[j] = 0;
        else if (en) model[j] = model[j] + (int'($signed(wrow[4*j +: 4])) <<< sh);
        if (model[j] > 2047) model[j] = 2047;
        if (model[j] < -2048) model[j] = -2048;
        checks++;
        if (int'($signed(acc[j])) !== model[j]) begin
          failures++;
          if (failures < 5) $display("FAIL k=%0d j=%0d acc=%0d model=%0d", k, j, $signed(acc[j]), model[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // watchdog
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
