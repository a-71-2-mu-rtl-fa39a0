// tb_zero_skip: self-checking test of the zero-skipping unit in all four
// configurations. Includes the published examples: type A with
// input[3:0] = 6 gives shifts 1, 3; type B with spikes {0,0,1,1,0,0,1,0}
// gives indices 2, 3, 6; type C with A = {0,0,0,1,0,1,0,0} and
// B = {0,0,1,1,0,1,0,0} gives indices 2, 3, 5 with shifts 0, 1, 1; type D
// emits all 8 positions with the spike bits. Random groups are then checked
// against an emission list built by the bench, including the cycle count
// (one cycle per nonzero bit, one for an all-zero group, 8 for type D).
module tb_zero_skip;
  import rsnn_pkg::*;
  logic clk = 0, rst_n = 0, load = 0;
  zs_mode_e mode = ZS_B;
  logic [7:0] grp_a = 0, grp_b = 0;
  logic emit_valid, emit_spk, last;
  logic [2:0] emit_idx, emit_sh;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  zero_skip dut (.*);

  // bits listed element 0 first (the publication's figure order)
  function automatic logic [7:0] lst(input bit b[8]);
    logic [7:0] v;
    for (int i = 0; i < 8; i++) v[i] = b[i];
    return v;
  endfunction

  task automatic run_group(input zs_mode_e m, input logic [7:0] a, input logic [7:0] b);
    int ei[$], es[$], ek[$];
    int n, cyc;
    logic [7:0] mg;
    mg = (m == ZS_C) ? (a | b) : (m == ZS_D) ? 8'hFF : a;
    for (int i = 0; i < 8; i++)
      if (mg[i]) begin
        ei.push_back(i);
        es.push_back(m == ZS_A ? i : m == ZS_C ? int'(a[i] & b[i]) : 0);
        ek.push_back(m == ZS_D ? int'(a[i]) : 1);
      end
    @(negedge clk); mode = m; grp_a = a; grp_b = b; load = 1;
    @(negedge clk); load = 0;
    n = 0; cyc = 0;
    forever begin
      cyc++;
      if (emit_valid) begin
        checks++;
        if (n >= ei.size() || emit_idx !== 3'(ei[n]) || emit_sh !== 3'(es[n]) || emit_spk !== 1'(ek[n])) begin
          failures++;
          $display("FAIL mode=%s a=%b b=%b emission %0d idx=%0d sh=%0d spk=%0d", m.name(), a, b, n, emit_idx, emit_sh, emit_spk);
        end
        n++;
      end
      if (last) break;
      @(negedge clk);
    end
    checks++;
    if (n !== ei.size() || cyc !== (ei.size() == 0 ? 1 : ei.size())) begin
      failures++;
      $display("FAIL mode=%s a=%b: %0d emissions in %0d cycles, expected %0d", m.name(), a, n, cyc, ei.size());
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_group(ZS_A, 8'h06, 8'h00);
    run_group(ZS_B, lst('{0,0,1,1,0,0,1,0}), 8'h00);
    run_group(ZS_C, lst('{0,0,0,1,0,1,0,0}), lst('{0,0,1,1,0,1,0,0}));
    run_group(ZS_D, lst('{0,1,0,1,1,0,1,0}), 8'h00);
    run_group(ZS_B, 8'h00, 8'h00);
    for (int k = 0; k < 400; k++)
      run_group(zs_mode_e'($urandom_range(3)), 8'($urandom), 8'($urandom));
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
