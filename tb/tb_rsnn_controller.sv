// tb_rsnn_controller: self-checking test of the controller on its own.
// The bench plays the zero-skipping units (zs_last asserted at random, so
// each group lasts a random number of cycles and lockstep layers must wait
// for the slower unit), the in buffer (in_full after a random delay,
// cleared by in_consume) and the output registers (fo_busy for a random
// time after each output command). Per frame it checks:
//   - the layer order L0-input, L0-recurrent, L1-feedforward, L1-recurrent,
//     FC, then Load Inputs;
//   - the groups loaded per layer: 40 input bytes; 16 groups on both units
//     for two time steps, 8 per unit (one half each) for one time step;
//     FC 7 pairs of 16 groups, then 8 per unit for the split last group;
//   - zero-skipping type per layer (A input, D/B recurrent, C/B FC);
//   - LIF updates (1 or 2 per recurrent layer), spike writes, one
//     in_consume, 7 pair and 1 sum output commands, none while busy;
//   - frame_cycles equals the cycles counted by the bench.
// It also checks Start -> Load Instructions -> Load Weights, the
// configuration latch, the spike clear and the stop command.
module tb_rsnn_controller;
  import rsnn_pkg::*;
  localparam logic [2:0] FO_NONE = 3'd0, FO_FF_SUM = 3'd1, FO_FF_SEP = 3'd2,
                         FO_OUT_PAIR = 3'd3, FO_OUT_SUM = 3'd4;
  logic clk = 0, rst_n = 0;
  cfg_t cfg_in = '0;
  logic cmd_start = 0, cmd_wdone = 0, cmd_stop = 0, in_full = 0, fo_busy = 0;
  logic in_consume;
  zs_mode_e zs_mode;
  logic [1:0] zs_load, zs_last = '0;
  logic [1:0][5:0] ld_grp, cur_grp;
  logic spk_clr, spk_we, spk_wr_layer, spk_wr_ts;
  logic [1:0] spk_rd_layer;
  logic pe_clr, lif_valid, lif_first, lif_layer, stim_ts2, stim_single;
  logic [2:0] fo_cmd;
  state_e state;
  cfg_t cfg;
  logic [3:0] fc_pair;
  logic fc_last, ld_weights_ok, frame_done;
  logic [15:0] frame_cycles;
  int checks = 0, failures = 0;
  int busy_left = 0, full_delay = 0, lock_waits = 0;

  always #5 clk = ~clk;
  rsnn_controller dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", s, $time); end
  endtask

  // Environment models, driven after each rising edge.
  always @(posedge clk) begin
    #1;
    zs_last[0] = ($urandom_range(2) == 0);
    zs_last[1] = ($urandom_range(2) == 0);
    if (state == ST_LOAD_IN && !in_full) begin
      if (full_delay == 0) in_full = 1;
      else full_delay--;
    end
    if (busy_left > 0) busy_left--;
    fo_busy = (busy_left > 0);
  end
  always @(negedge clk) begin
    if (in_consume) begin in_full <= 0; full_delay = $urandom_range(30); end
    if (fo_cmd === FO_OUT_PAIR || fo_cmd === FO_OUT_SUM) busy_left = $urandom_range(1, 40);
    if (fo_cmd !== FO_NONE) chk(!fo_busy, "output command while busy");
  end

  // Per-frame counters, sampled on the rising edge.
  int n_load[9][2], n_lif[9], n_we[9], n_cons, n_pair, n_sum, cyc;
  state_e order[$];
  state_e prev = ST_START;
  always @(posedge clk) if (rst_n) begin
    if (state >= ST_L0_INPUT) begin
      cyc++;
      for (int u = 0; u < 2; u++) if (zs_load[u]) n_load[state][u]++;
      if (lif_valid) n_lif[state]++;
      if (spk_we) n_we[state]++;
      if (in_consume) n_cons++;
      if (fo_cmd == FO_OUT_PAIR) n_pair++;
      if (fo_cmd == FO_OUT_SUM) n_sum++;
      if (zs_load != 0) begin
        case (state)
          ST_L0_INPUT: chk(zs_mode == ZS_A, "input layer uses type A");
          ST_FC: chk(zs_mode == (cfg.two_ts ? ZS_C : ZS_B), "FC zero-skip type");
          default: chk(zs_mode == (cfg.two_ts ? ZS_D : ZS_B), "recurrent zero-skip type");
        endcase
      end
      if (zs_last != 2'b11 && zs_last != 2'b00 && zs_mode != ZS_B) lock_waits++;
    end
    if (state != prev) order.push_back(state);
    prev = state;
  end

  task automatic clear_counts();
    foreach (n_load[s, u]) n_load[s][u] = 0;
    foreach (n_lif[s]) begin n_lif[s] = 0; n_we[s] = 0; end
    n_cons = 0; n_pair = 0; n_sum = 0; cyc = 0;
    order.delete();
  endtask

  task automatic run_frame(input bit two);
    int g;
    clear_counts();
    @(posedge frame_done);
    @(negedge clk);
    order = order.find(x) with (x >= ST_L0_INPUT);
    chk(order.size() == 5 && order[0] == ST_L0_INPUT && order[1] == ST_L0_REC && order[2] == ST_L1_FF &&
        order[3] == ST_L1_REC && order[4] == ST_FC, "layer order");
    chk(n_load[ST_L0_INPUT][0] == 40 && n_load[ST_L0_INPUT][1] == 40, "40 input groups");
    g = two ? 16 : 8;
    for (int s = ST_L0_REC; s <= ST_L1_REC; s++)
      chk(n_load[s][0] == g && n_load[s][1] == g, $sformatf("recurrent groups in %s", state_e'(s)));
    chk(n_load[ST_FC][0] == 7 * 16 + 8 && n_load[ST_FC][1] == 7 * 16 + 8, "FC groups");
    chk(n_lif[ST_L0_REC] == (two ? 2 : 1) && n_lif[ST_L1_REC] == (two ? 2 : 1), "LIF updates");
    chk(n_we[ST_L0_REC] == (two ? 2 : 1) && n_we[ST_L1_REC] == (two ? 2 : 1), "spike writes");
    chk(n_cons == 1 && n_pair == 7 && n_sum == 1, "consume / output commands");
    chk(int'(frame_cycles) == cyc, $sformatf("frame_cycles %0d vs %0d", frame_cycles, cyc));
  endtask

  task automatic start_seq(input bit two);
    @(negedge clk);
    cfg_in = '{two_ts: two, beta_sh0: 3'd1, beta_sh1: 3'd2, vth_exp0: 4'd5, vth_exp1: 4'd6};
    cmd_start = 1;
    @(negedge clk); cmd_start = 0;
    chk(state == ST_LOAD_INSTR && ld_weights_ok, "Start -> Load Instructions");
    @(negedge clk);
    chk(state == ST_LOAD_W && cfg == cfg_in && spk_clr, "configuration latched, spikes cleared");
    cfg_in = '0;
    repeat (5) @(negedge clk);
    chk(state == ST_LOAD_W, "waits for weights_done");
    cmd_wdone = 1; @(negedge clk); cmd_wdone = 0;
    chk(state == ST_LOAD_IN && !ld_weights_ok, "Load Inputs");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int seq = 0; seq < 2; seq++) begin
      start_seq(seq == 0);
      for (int f = 0; f < 4; f++) run_frame(seq == 0);
      @(negedge clk); cmd_stop = 1; @(negedge clk); cmd_stop = 0;
      repeat (3000) begin
        if (state == ST_START) break;
        @(negedge clk);
      end
      chk(state == ST_START, "stop returns to Start");
    end
    chk(lock_waits > 0, "lockstep waits exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
