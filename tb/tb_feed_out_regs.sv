// tb_feed_out_regs: self-checking test of the feedforward/output registers.
// Random accumulator values are stored with each command; the bench checks
// the LIF stimulus for one and two time steps (saturating sums), the output
// stream under random backpressure (4 values per beat, lowest index first,
// out_last on beat 32 of each group, two groups for a pair command and one
// summed group for the last FC group) and that busy covers the stream.
module tb_feed_out_regs;
  import rsnn_pkg::*;
  localparam int N = 128;
  localparam logic [2:0] FO_NONE = 3'd0, FO_FF_SUM = 3'd1, FO_FF_SEP = 3'd2,
                         FO_OUT_PAIR = 3'd3, FO_OUT_SUM = 3'd4;
  logic clk = 0, rst_n = 0, stim_ts2 = 0, single = 0, out_ready = 0;
  logic [2:0] cmd = FO_NONE;
  logic signed [N-1:0][11:0] acc1 = '0, acc2 = '0, stim;
  logic busy, out_valid, out_last;
  logic [3:0][11:0] out_data;
  int checks = 0, failures = 0, nstall = 0;
  int r1[N], r2[N];
  always #5 clk = ~clk;
  feed_out_regs #(.N(N)) dut (.*);
  function automatic int sat(int v);
    return v > 2047 ? 2047 : v < -2048 ? -2048 : v;
  endfunction
  function automatic int a1(int j); return int'($signed(acc1[j])); endfunction
  function automatic int a2(int j); return int'($signed(acc2[j])); endfunction
  task automatic rnd_acc();
    for (int j = 0; j < N; j++) begin
      acc1[j] = 12'($urandom_range(4095));
      acc2[j] = 12'($urandom_range(4095));
    end
  endtask
  task automatic check_stim();
    for (int m = 0; m < 3; m++) begin
      single = (m == 0); stim_ts2 = (m == 2);
      rnd_acc(); #1;
      for (int j = 0; j < N; j++) begin
        int e;
        e = single ? sat(sat(a1(j) + a2(j)) + r1[j]) : stim_ts2 ? sat(a2(j) + r2[j]) : sat(a1(j) + r1[j]);
        checks++;
        if (int'($signed(stim[j])) !== e) begin failures++; if (failures < 8) $display("FAIL stim m=%0d j=%0d", m, j); end
      end
    end
  endtask
  task automatic stream(input int ngrp);
    int exp_v[$];
    for (int j = 0; j < N; j++) exp_v.push_back(r1[j]);
    if (ngrp == 2) for (int j = 0; j < N; j++) exp_v.push_back(r2[j]);
    for (int b = 0; b < ngrp * N / 4; ) begin
      @(negedge clk);
      out_ready = ($urandom_range(3) !== 0);
      #1;
      checks++;
      if (!out_valid || !busy) begin failures++; $display("FAIL stream ended early at beat %0d", b); break; end
      if (out_ready) begin
        for (int k = 0; k < 4; k++)
          if (int'($signed(out_data[k])) !== exp_v[4*b + k]) begin failures++; if (failures < 8) $display("FAIL beat %0d value %0d", b, k); end
        if (out_last !== ((b % 32) == 31)) begin failures++; $display("FAIL out_last at beat %0d", b); end
        b++;
      end else nstall++;
    end
    @(negedge clk); out_ready = 0;
    checks++;
    if (out_valid || busy) begin failures++; $display("FAIL stream did not stop"); end
  endtask
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      // FF_SUM
      @(negedge clk); rnd_acc(); cmd = FO_FF_SUM;
      for (int j = 0; j < N; j++) begin r1[j] = sat(a1(j) + a2(j)); r2[j] = r1[j]; end
      @(negedge clk); cmd = FO_NONE; check_stim();
      // FF_SEP
      @(negedge clk); rnd_acc(); cmd = FO_FF_SEP;
      for (int j = 0; j < N; j++) begin r1[j] = a1(j); r2[j] = a2(j); end
      @(negedge clk); cmd = FO_NONE; check_stim();
      // OUT_PAIR
      @(negedge clk); rnd_acc(); cmd = FO_OUT_PAIR;
      for (int j = 0; j < N; j++) begin r1[j] = a1(j); r2[j] = a2(j); end
      @(posedge clk); #1 cmd = FO_NONE;
      stream(2);
      // OUT_SUM
      @(negedge clk); rnd_acc(); cmd = FO_OUT_SUM;
      for (int j = 0; j < N; j++) r1[j] = sat(a1(j) + a2(j));
      @(posedge clk); #1 cmd = FO_NONE;
      stream(1);
    end
    checks++; if (nstall == 0) begin failures++; $display("FAIL no backpressure applied"); end
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
