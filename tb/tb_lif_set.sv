// tb_lif_set: self-checking test of the LIF set: two time steps per trial
// with random stimuli, decay shifts and thresholds, compared with
// U1 = stim1, s1 = U1 >= 2^e, U2 = stim2 + (s1 ? 0 : U1 >> b), s2 = U2 >= 2^e.
module tb_lif_set;
  import rsnn_pkg::*;
  localparam int N = 128;
  logic clk = 0, rst_n = 0, valid = 0, first = 0;
  logic [2:0] beta_sh = 0;
  logic [3:0] vth_exp = 0;
  logic signed [N-1:0][11:0] stim = '0;
  logic [N-1:0] spk;
  int checks = 0, failures = 0, ncarry = 0;
  int u1[N], s1[N], u2, s2, m;
  always #5 clk = ~clk;
  lif_set #(.N(N)) dut (.*);
  function automatic int sat(int v);
    return v > 2047 ? 2047 : v < -2048 ? -2048 : v;
  endfunction
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      beta_sh = 3'($urandom);
      vth_exp = 4'($urandom_range(3, 10));
      @(negedge clk);
      valid = 1; first = 1;
      for (int j = 0; j < N; j++) begin
        stim[j] = 12'($urandom_range(0, 1 << (vth_exp + 1)) - (1 << (vth_exp - 1)));
        u1[j] = int'($signed(stim[j]));
        s1[j] = (u1[j] >= (1 << vth_exp));
      end
      @(posedge clk); #1;
      for (int j = 0; j < N; j++) begin
        checks++;
        if (int'(spk[j]) !== s1[j]) begin failures++; $display("FAIL ts1 j=%0d", j); end
      end
      @(negedge clk);
      first = 0;
      for (int j = 0; j < N; j++) stim[j] = 12'($urandom_range(0, 1 << vth_exp) - (1 << (vth_exp - 1)));
      @(posedge clk); #1;
      for (int j = 0; j < N; j++) begin
        m  = s1[j] ? 0 : (u1[j] >>> beta_sh);
        if (m !== 0) ncarry++;
        u2 = sat(int'($signed(stim[j])) + m);
        s2 = (u2 >= (1 << vth_exp));
        checks++;
        if (int'(spk[j]) !== s2) begin failures++; $display("FAIL ts2 j=%0d u1=%0d stim=%0d", j, u1[j], $signed(stim[j])); end
      end
      @(negedge clk); valid = 0;
    end
    checks++; if (ncarry == 0) begin failures++; $display("FAIL: membrane never carried"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // watchdog
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
