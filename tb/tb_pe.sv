// tb_pe: self-checking test of one PE (shift, enable, clear, saturation).
// Random weights and shift values are accumulated and compared with a
// saturating integer sum kept by the bench.
module tb_pe;
  import rsnn_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [2:0] sh = 0;
  logic signed [3:0] w = 0;
  logic signed [11:0] acc;
  int checks = 0, failures = 0, model = 0, nsat = 0;
  always #5 clk = ~clk;
  pe dut (.*);
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      clr = ($urandom_range(99) < 3);
      en  = ($urandom_range(99) < 70);
      w   = 4'($urandom);
      sh  = 3'($urandom);
      @(posedge clk); #1;
      if (clr) model = 0;
      else if (en) begin
        model = model + (int'(w) <<< sh);
        if (model > 2047) begin model = 2047; nsat++; end
        if (model < -2048) begin model = -2048; nsat++; end
      end
      checks++;
      if (int'(acc) !== model) begin
        failures++;
        if (failures < 5) $display("FAIL k=%0d acc=%0d model=%0d", k, acc, model);
      end
    end
    checks++; if (nsat == 0) begin failures++; $display("FAIL: saturation never hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
