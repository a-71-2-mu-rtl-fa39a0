// tb_spike_reg_set: self-checking test of the spike register set. Random
// (layer, time step) vectors are written and every group is read back on
// both ports, for both time steps, against a copy kept by the bench; clr
// must empty all four vectors.
module tb_spike_reg_set;
  import rsnn_pkg::*;
  localparam int N = 128;
  logic clk = 0, rst_n = 0, clr = 0, we = 0, wr_layer = 0, wr_ts = 0;
  logic [N-1:0] wr_data = '0;
  logic [1:0] rd_layer = '0;
  logic [1:0][3:0] rd_grp = '0;
  logic [1:0][7:0] rd_a, rd_b;
  logic [N-1:0] model [2][2];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  spike_reg_set #(.N(N)) dut (.*);
  task automatic check_all();
    for (int l = 0; l < 2; l++)
      for (int g = 0; g < 16; g++) begin
        @(negedge clk);
        rd_layer = {1'(l), 1'(1 - l)};
        rd_grp = {4'(g), 4'(15 - g)};
        #1;
        for (int p = 0; p < 2; p++) begin
          int gg, ll;
          gg = p ? g : 15 - g; ll = p ? l : 1 - l;
          checks++;
          if (rd_a[p] !== model[ll][0][gg*8 +: 8] || rd_b[p] !== model[ll][1][gg*8 +: 8]) begin
            failures++;
            $display("FAIL port %0d layer %0d group %0d", p, ll, gg);
          end
        end
      end
  endtask
  initial begin
    for (int l = 0; l < 2; l++) for (int t = 0; t < 2; t++) model[l][t] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check_all();
    for (int k = 0; k < 12; k++) begin
      @(negedge clk);
      we = 1; wr_layer = 1'($urandom); wr_ts = 1'($urandom);
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      model[wr_layer][wr_ts] = wr_data;
      @(negedge clk); we = 0;
      check_all();
    end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int l = 0; l < 2; l++) for (int t = 0; t < 2; t++) model[l][t] = '0;
    check_all();
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
