// tb_rsnn_top: end-to-end test of the accelerator at its full size
// (128 neurons, 40 inputs, 1920 FC outputs, all parameters at default).
//
// The bench loads random pruned-looking weights over the 128-bit load port,
// runs a sequence of frames with two time steps, then one time step, then
// two dense frames in each mode, and compares every one of the 1920 FC results
// per frame with a behavioural model of the network written here with plain
// integer loops (same saturation points and accumulation order as the
// hardware's PE sets). It also checks, per frame, the number of cycles the
// zero-skipping units spend scanning against a formula worked out from the
// spike patterns, and for the dense frames against the published dual-PE
// cycle count of 1312 (one time step). out_ready is randomly low to force
// output back-pressure; the next frame's input is written while the
// current one is being computed. Each mechanism is counted and must occur.
module tb_rsnn_top;
  import rsnn_pkg::*;

  localparam int N = 128, NIN = 40, NFC = 1920, NG = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        ctrl_we = 0;
  logic [31:0] ctrl_wdata = 0, ctrl_rdata;
  logic        ld_valid = 0, ld_ready;
  logic [14:0] ld_addr = 0;
  logic [127:0] ld_data = 0;
  logic        out_valid, out_ready, out_last;
  logic [3:0][11:0] out_data;
  state_e      state;
  logic        frame_done;
  logic [15:0] frame_cycles;

  rsnn_top dut (.*);

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- model
  int w_in [NIN][N];
  int w01  [N][N];
  int w10  [N][N];
  int w11  [N][N];
  int wfc  [N][NFC];
  int h0   [2][N];     // spikes, [ts][neuron]
  int h1   [2][N];
  int x    [NIN];
  int exp_out[$];
  int exp_run;
  int two_ts, bsh0, bsh1, vex0, vex1;
  int n_sat = 0, n_leak = 0;
  int n_spk = 0, n_spk_slots = 0, n_xbits = 0;   // activity of the frame being modelled

  function automatic int sat(int v);
    if (v > 2047) return 2047;
    if (v < -2048) return -2048;
    return v;
  endfunction
  function automatic int satc(int a, int b);
    int s = a + b;
    if (s > 2047 || s < -2048) n_sat++;
    return sat(s);
  endfunction
  function automatic int cost(int pop);
    return pop == 0 ? 1 : pop;
  endfunction
  function automatic int imax(int a, int b);
    return a > b ? a : b;
  endfunction

  // LIF over both time steps (or one); updates h in place.
  task automatic lif(input int stim[2][N], input int bsh, input int vex, inout int h[2][N]);
    int u, mem;
    for (int j = 0; j < N; j++) begin
      u = sat(stim[0][j]);
      h[0][j] = (u >= (1 << vex)) ? 1 : 0;
      mem = h[0][j] ? 0 : u;
      if (two_ts) begin
        if (mem >>> bsh !== 0) n_leak++;
        u = satc(stim[1][j], mem >>> bsh);
        h[1][j] = (u >= (1 << vex)) ? 1 : 0;
      end
    end
  endtask

  // Recurrent-style layer accumulation: acc[set][j] for spikes s
  // (time step ts of spike vector), following the hardware split.
  task automatic spike_acc(input int s[2][N], input int w[N][N], output int acc[2][N], inout int run);
    int c0, c1, pop;
    for (int j = 0; j < N; j++) begin acc[0][j] = 0; acc[1][j] = 0; end
    if (two_ts) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          if (s[0][i]) acc[0][j] = satc(acc[0][j], w[i][j]);
          if (s[1][i]) acc[1][j] = satc(acc[1][j], w[i][j]);
        end
      run += 8 * NG;
    end else begin
      c0 = 0; c1 = 0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          if (s[0][i]) begin
            if (i < N / 2) acc[0][j] = satc(acc[0][j], w[i][j]);
            else           acc[1][j] = satc(acc[1][j], w[i][j]);
          end
      for (int g = 0; g < NG; g++) begin
        pop = 0;
        for (int b = 0; b < 8; b++) pop += s[0][8*g+b];
        if (g < NG / 2) c0 += cost(pop); else c1 += cost(pop);
      end
      run += imax(c0, c1);
    end
  endtask

  task automatic model_frame();
    int acc[2][N];
    int ff[2][N];
    int stim[2][N];
    int h0n[2][N];
    int h1n[2][N];
    int run, a_lo, a_hi, pl, ph, m, sh, c0, c1, pop;
    int fa[2][N];
    run = 0;
    // L0-input: set 1 low nibble, set 2 high nibble, bit-serial
    for (int j = 0; j < N; j++) begin acc[0][j] = 0; acc[1][j] = 0; end
    for (int i = 0; i < NIN; i++) begin
      pl = 0; ph = 0;
      for (int b = 0; b < 8; b++)
        if (x[i][b]) begin
          for (int j = 0; j < N; j++) acc[b / 4][j] = satc(acc[b / 4][j], w_in[i][j] <<< b);
          if (b < 4) pl++; else ph++;
        end
      run += imax(cost(pl), cost(ph));
    end
    for (int j = 0; j < N; j++) begin ff[0][j] = satc(acc[0][j], acc[1][j]); ff[1][j] = ff[0][j]; end
    // L0-recurrent
    spike_acc(h0, w01, acc, run);
    for (int j = 0; j < N; j++)
      if (two_ts) begin stim[0][j] = satc(acc[0][j], ff[0][j]); stim[1][j] = satc(acc[1][j], ff[1][j]); end
      else begin stim[0][j] = satc(satc(acc[0][j], acc[1][j]), ff[0][j]); stim[1][j] = 0; end
    h0n = h0;
    lif(stim, bsh0, vex0, h0n);
    h0 = h0n;
    // L1-feedforward
    spike_acc(h0, w10, acc, run);
    for (int j = 0; j < N; j++)
      if (two_ts) begin ff[0][j] = acc[0][j]; ff[1][j] = acc[1][j]; end
      else begin ff[0][j] = satc(acc[0][j], acc[1][j]); ff[1][j] = ff[0][j]; end
    // L1-recurrent
    spike_acc(h1, w11, acc, run);
    for (int j = 0; j < N; j++)
      if (two_ts) begin stim[0][j] = satc(acc[0][j], ff[0][j]); stim[1][j] = satc(acc[1][j], ff[1][j]); end
      else begin stim[0][j] = satc(satc(acc[0][j], acc[1][j]), ff[0][j]); stim[1][j] = 0; end
    h1n = h1;
    lif(stim, bsh1, vex1, h1n);
    h1 = h1n;
    for (int t = 0; t < (two_ts ? 2 : 1); t++)
      for (int j = 0; j < N; j++) begin
        n_spk += h0[t][j] + h1[t][j];
        n_spk_slots += 2;
      end
    for (int i = 0; i < NIN; i++) n_xbits += $countones(8'(x[i]));
    // FC: merged spikes
    for (int grp = 0; grp < NFC / N; grp++) begin
      for (int j = 0; j < N; j++) begin fa[0][j] = 0; fa[1][j] = 0; end
      for (int i = 0; i < N; i++) begin
        m  = two_ts ? (h1[0][i] | h1[1][i]) : h1[0][i];
        sh = two_ts ? (h1[0][i] & h1[1][i]) : 0;
        if (m)
          for (int j = 0; j < N; j++) begin
            if (grp == NFC / N - 1 && i >= N / 2)
              fa[1][j] = satc(fa[1][j], wfc[i][grp*N + j] <<< sh);
            else
              fa[0][j] = satc(fa[0][j], wfc[i][grp*N + j] <<< sh);
          end
      end
      for (int j = 0; j < N; j++)
        exp_out.push_back(grp == NFC / N - 1 ? satc(fa[0][j], fa[1][j]) : fa[0][j]);
    end
    c0 = 0; c1 = 0;
    for (int g = 0; g < NG; g++) begin
      pop = 0;
      for (int b = 0; b < 8; b++) pop += two_ts ? (h1[0][8*g+b] | h1[1][8*g+b]) : h1[0][8*g+b];
      if (g < NG / 2) c0 += cost(pop); else c1 += cost(pop);
    end
    run += (NFC / N / 2) * (c0 + c1) + imax(c0, c1);
    exp_run = run;
  endtask

  // ---------------------------------------------------------------- bus tasks
  task automatic ctrl_write(input logic [31:0] v);
    @(negedge clk); ctrl_we = 1; ctrl_wdata = v;
    @(negedge clk); ctrl_we = 0;
  endtask

  function automatic logic [31:0] cfg_word(int cmd);
    return 32'(cmd) | (32'(two_ts) << 3) | (32'(bsh0) << 4) | (32'(bsh1) << 7) |
           (32'(vex0) << 10) | (32'(vex1) << 14);
  endfunction

  int n_interleave = 0;
  task automatic ld_beat(input ld_target_e t, input int row, input int q, input logic [127:0] d);
    @(negedge clk);
    ld_valid = 1; ld_addr = {t, 10'(row), 2'(q)}; ld_data = d;
    @(posedge clk);
    while (!ld_ready) @(posedge clk);
    if (t == LT_INBUF && state >= ST_L0_INPUT) n_interleave++;
    @(negedge clk); ld_valid = 0;
  endtask

  task automatic load_row(input ld_target_e t, input int row, input int w[N]);
    logic [511:0] r;
    for (int j = 0; j < N; j++) r[4*j +: 4] = 4'(w[j]);
    for (int q = 0; q < 4; q++) ld_beat(t, row, q, r[128*q +: 128]);
  endtask

  task automatic load_weights(input bit only_rnn);
    int r[N];
    for (int i = 0; i < NIN; i++) load_row(LT_WIN, i, w_in[i]);
    for (int l = 0; l < 3; l++)
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < N; j++) r[j] = (l == 0) ? w01[i][j] : (l == 1) ? w10[i][j] : w11[i][j];
        load_row(i < N / 2 ? LT_WSP0 : LT_WSP1, l * (N / 2) + i % (N / 2), r);
      end
    if (!only_rnn)
      for (int grp = 0; grp < NFC / N; grp++)
        for (int i = 0; i < N; i++) begin
          for (int j = 0; j < N; j++) r[j] = wfc[i][grp*N + j];
          if (grp == NFC / N - 1)
            load_row(i < N / 2 ? LT_WFC1 : LT_WFC2, (grp / 2) * N + i % (N / 2), r);
          else
            load_row(grp % 2 ? LT_WFC2 : LT_WFC1, (grp / 2) * N + i, r);
        end
  endtask

  task automatic load_input();
    logic [383:0] v = '0;
    for (int i = 0; i < NIN; i++) v[8*i +: 8] = 8'(x[i]);
    for (int b = 0; b < 3; b++) ld_beat(LT_INBUF, 0, b, v[128*b +: 128]);
  endtask

  function automatic int rw(int pct, int mag);
    if (int'($urandom_range(99)) >= pct) return 0;
    return int'($urandom_range(2 * mag)) - mag;
  endfunction

  // ---------------------------------------------------------------- monitors
  int got_out[$];
  int n_backpressure = 0, n_zero_group = 0, n_merge_double = 0, n_lock_wait = 0;
  int n_post_stall = 0, run_cnt = 0, frames_2ts = 0, frames_1ts = 0;
  int run_log[$], fc_log[$];

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready)
      for (int k = 0; k < 4; k++) got_out.push_back(int'($signed(out_data[k])));
    if (out_valid && !out_ready) n_backpressure++;
    if (state >= ST_L0_INPUT && dut.u_ctrl.sub == 1) begin
      run_cnt++;
      if (!dut.zs_valid[0] && !dut.zs_valid[1]) n_zero_group++;
      if (dut.u_ctrl.sync_mode && (dut.zs_valid[0] !== dut.zs_valid[1])) n_lock_wait++;
      if (state == ST_FC && dut.zs_valid[0] && dut.zs_sh[0] == 1) n_merge_double++;
    end
    if (state >= ST_L0_INPUT && dut.u_ctrl.sub == 3 && dut.fo_busy) n_post_stall++;
    if (frame_done) begin
      run_log.push_back(run_cnt);
      fc_log.push_back(int'(frame_cycles));
      run_cnt = 0;
    end
  end

  initial begin
    out_ready = 1;
    forever begin
      @(negedge clk);
      out_ready = ($urandom_range(99) < 75);
    end
  end

  // ---------------------------------------------------------------- stimulus
  int exp_runs[$];
  int nframes;

  task automatic gen_input(input bit dense);
    for (int i = 0; i < NIN; i++) begin
      x[i] = 0;
      for (int b = 0; b < 8; b++)
        if (dense || $urandom_range(99) < 43) x[i] |= (1 << b);
    end
  endtask

  int dens_spk[$], dens_x[$];
  task automatic run_frames(input int n, input bit dense);
    for (int f = 0; f < n; f++) begin
      gen_input(dense);
      n_spk = 0; n_spk_slots = 0; n_xbits = 0;
      model_frame();
      dens_spk.push_back(100 * n_spk / n_spk_slots);
      dens_x.push_back(100 * n_xbits / (8 * NIN));
      exp_runs.push_back(exp_run);
      if (two_ts) frames_2ts++; else frames_1ts++;
      load_input();
      nframes++;
    end
  endtask

  task automatic wait_frames(input int n);
    while (run_log.size() < n) @(posedge clk);
  endtask

  task automatic begin_run(input int ts);
    two_ts = ts;
    for (int s = 0; s < 2; s++) for (int j = 0; j < N; j++) begin h0[s][j] = 0; h1[s][j] = 0; end
    ctrl_write(cfg_word(1));
    while (state !== ST_LOAD_W) @(posedge clk);
  endtask

  task automatic end_run();
    ctrl_write(cfg_word(4));
    while (state !== ST_START) @(posedge clk);
  endtask

  initial begin
    nframes = 0;
    bsh0 = 1; bsh1 = 1; vex0 = 8; vex1 = 4;
    for (int i = 0; i < NIN; i++) for (int j = 0; j < N; j++) w_in[i][j] = rw(15, 2);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      w01[i][j] = rw(50, 7); w10[i][j] = rw(50, 7); w11[i][j] = rw(50, 7);
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < NFC; j++) wfc[i][j] = rw(60, 7);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Two time steps, 3 frames; weights loaded in Start/Load Weights.
    begin_run(1);
    load_weights(0);
    ctrl_write(cfg_word(2));
    run_frames(3, 0);
    wait_frames(nframes);
    end_run();

    // One time step, 2 frames; weights kept.
    begin_run(0);
    ctrl_write(cfg_word(2));
    run_frames(2, 0);
    wait_frames(nframes);
    end_run();

    // Dense frames: every input bit and every spike is 1.
    for (int i = 0; i < NIN; i++) for (int j = 0; j < N; j++) w_in[i][j] = 1;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      w01[i][j] = 1; w10[i][j] = 1; w11[i][j] = 1;
    end
    vex0 = 0; vex1 = 0;
    begin_run(0);
    load_weights(1);
    ctrl_write(cfg_word(2));
    run_frames(2, 1);
    wait_frames(nframes);
    end_run();
    begin_run(1);
    ctrl_write(cfg_word(2));
    run_frames(2, 1);
    wait_frames(nframes);
    end_run();
    while (got_out.size() < exp_out.size()) @(posedge clk);
    repeat (5) @(posedge clk);

    // Control register read-back: frame count, configuration, back in
    // Start with weight loads open.
    checks++;
    if (ctrl_rdata !== {14'(nframes), 4'(vex1), 4'(vex0), 3'(bsh1), 3'(bsh0), 1'(two_ts), 3'b010}) begin
      failures++;
      $display("FAIL: control register reads %h", ctrl_rdata);
    end

    // Results.
    checks++;
    if (got_out.size() !== exp_out.size()) begin
      failures++;
      $display("FAIL: %0d outputs, expected %0d", got_out.size(), exp_out.size());
    end
    begin
      int bad = 0;
      for (int k = 0; k < exp_out.size() && k < got_out.size(); k++) begin
        checks++;
        if (got_out[k] !== exp_out[k]) begin
          failures++;
          if (bad++ < 10)
            $display("FAIL: output %0d (frame %0d, neuron %0d): got %0d expected %0d",
                     k, k / NFC, k % NFC, got_out[k], exp_out[k]);
        end
      end
    end
    for (int f = 0; f < nframes; f++) begin
      checks++;
      $display("frame %0d: scan cycles %0d (expected %0d), frame cycles %0d, input bits %0d%% ones, spikes %0d%% ones",
               f, run_log[f], exp_runs[f], fc_log[f], dens_x[f], dens_spk[f]);
      if (run_log[f] !== exp_runs[f]) failures++;
    end
    // Second dense one-time-step frame (recurrent spikes now all 1):
    // the published dual-PE count without any skipping.
    checks++;
    if (run_log[nframes-3] !== 1312) begin
      failures++;
      $display("FAIL: dense 1-step scan cycles %0d, published 1312", run_log[nframes-3]);
    end
    // Dense two-time-step frame with merged FC spikes: 160 + 384 + 960.
    checks++;
    if (run_log[nframes-1] !== 1504) begin
      failures++;
      $display("FAIL: dense 2-step scan cycles %0d, expected 1504", run_log[nframes-1]);
    end
    $display("mechanisms: backpressure=%0d zero_groups=%0d merged_x2=%0d lockstep_wait=%0d post_stall=%0d interleaved_input=%0d frames_2ts=%0d frames_1ts=%0d leak=%0d saturations=%0d",
             n_backpressure, n_zero_group, n_merge_double, n_lock_wait, n_post_stall,
             n_interleave, frames_2ts, frames_1ts, n_leak, n_sat);
    checks++; if (n_backpressure == 0) begin failures++; $display("FAIL: no back-pressure"); end
    checks++; if (n_zero_group == 0)   begin failures++; $display("FAIL: no skipped zero group"); end
    checks++; if (n_merge_double == 0) begin failures++; $display("FAIL: no merged double spike"); end
    checks++; if (n_lock_wait == 0)    begin failures++; $display("FAIL: no lockstep wait"); end
    checks++; if (n_post_stall == 0)   begin failures++; $display("FAIL: no output stall"); end
    checks++; if (n_interleave == 0)   begin failures++; $display("FAIL: no interleaved input load"); end
    checks++; if (frames_2ts == 0 || frames_1ts == 0) begin failures++; $display("FAIL: mode not switched"); end
    checks++; if (n_leak == 0)         begin failures++; $display("FAIL: membrane never carried"); end
    checks++; if (n_sat == 0)          begin failures++; $display("FAIL: no saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
