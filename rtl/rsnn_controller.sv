// rsnn_controller: the accelerator's state machine and group sequencer.
//
// The top-level states follow the published flow: Start -> Load
// Instructions -> Load Weights -> Load Inputs -> L0-input -> L0-recurrent
// -> L1-feedforward -> L1-recurrent -> FC -> back to Load Inputs for the
// next 10 ms frame. Every layer state runs the same four sub-phases:
//   INIT   clear the PE accumulators and load the first 8-bit group into
//          each zero-skipping unit
//   RUN    the units emit one index per cycle; a unit that is on its last
//          emission is given its next group on the same edge. In lockstep
//          layers (input bits, two-time-step recurrent layers, FC groups
//          shared by both PE sets) both units are reloaded together because
//          they share one weight row; in the others (one time step, the
//          split last FC group) each advances on its own.
//   DRAIN  one cycle for the weight buffer read and the last accumulate
//   POST   layer-specific: store the feedforward result, run the LIF set
//          (one cycle per time step) and write its spikes back, or copy the
//          FC results to the output registers. POST waits while the
//          output registers are still streaming (a stall).
// The FC layer makes 7 passes in which PE set 1 and 2 compute output
// groups 2p and 2p+1 with the same spike indices, then one pass for the
// 15th group in which each set takes half of the 128 inputs and the halves
// are added. Which zero-skipping type each layer uses (A input, B one time
// step, C merged FC spikes, D two-time-step recurrent) is the published
// assignment; the sub-phases, the lockstep rule and the cycle accounting
// are this design's.
//
// frame_cycles counts the cycles from entering L0-input to leaving FC.
// Lint note: rst_n is also used in the 'disable iff' of the assertion
// below, which verilator reports as a synchronous use; the flops use it
// only as an asynchronous reset, so the warning stands.
module rsnn_controller
  import rsnn_pkg::*;
#(
  parameter int unsigned N   = 128,
  parameter int unsigned NIN = 40,
  parameter int unsigned NFC = 1920,
  parameter int unsigned IN_ROWS = 48,
  localparam int unsigned NG  = N / GRP,
  localparam int unsigned GW  = $clog2(IN_ROWS) > $clog2(NG) ? $clog2(IN_ROWS) : $clog2(NG),
  localparam int unsigned NFG = NFC / N,          // FC output groups (15)
  localparam int unsigned NPAIR = NFG / 2         // passes with both sets (7)
) (
  input  logic                clk,
  input  logic                rst_n,
  // control register
  input  cfg_t                cfg_in,
  input  logic                cmd_start,
  input  logic                cmd_wdone,
  input  logic                cmd_stop,
  // input buffer
  input  logic                in_full,
  output logic                in_consume,
  // zero-skipping units
  output zs_mode_e            zs_mode,
  output logic [1:0]          zs_load,
  output logic [1:0][GW-1:0]  ld_grp,      // group being loaded (read address)
  output logic [1:0][GW-1:0]  cur_grp,     // group being scanned
  input  logic [1:0]          zs_last,
  // spike register set
  output logic                spk_clr,
  output logic [1:0]          spk_rd_layer,
  output logic                spk_we,
  output logic                spk_wr_layer,
  output logic                spk_wr_ts,
  // PEs, LIF, feed/out registers
  output logic                pe_clr,
  output logic                lif_valid,
  output logic                lif_first,
  output logic                lif_layer,
  output logic                stim_ts2,
  output logic                stim_single,
  output logic [2:0]          fo_cmd,
  input  logic                fo_busy,
  // status
  output state_e              state,
  output cfg_t                cfg,
  output logic [3:0]          fc_pair,
  output logic                fc_last,
  output logic                ld_weights_ok,
  output logic                frame_done,
  output logic [15:0]         frame_cycles
);

  localparam logic [2:0] FO_NONE = 3'd0, FO_FF_SUM = 3'd1, FO_FF_SEP = 3'd2,
                         FO_OUT_PAIR = 3'd3, FO_OUT_SUM = 3'd4;

  typedef enum logic [1:0] {SUB_INIT, SUB_RUN, SUB_DRAIN, SUB_POST} sub_e;

  sub_e              sub;
  logic [1:0]        post_step;
  logic [1:0]        fin;          // unit has finished its last group
  logic              stop_req;
  logic [15:0]       cyc;
  logic              sync_mode;
  logic [1:0][GW-1:0] g_first, g_end;
  state_e            next_layer;

  // Layer-dependent configuration.
  always_comb begin
    sync_mode = 1'b1;
    zs_mode   = ZS_B;
    g_first   = '0;
    g_end     = {GW'(NG - 1), GW'(NG - 1)};
    spk_rd_layer = 2'b00;
    unique case (state)
      ST_L0_INPUT: begin
        zs_mode = ZS_A;
        g_end   = {GW'(NIN - 1), GW'(NIN - 1)};
      end
      ST_L0_REC, ST_L1_FF, ST_L1_REC: begin
        spk_rd_layer = (state == ST_L1_REC) ? 2'b11 : 2'b00;
        if (cfg.two_ts) zs_mode = ZS_D;
        else begin
          zs_mode   = ZS_B;
          sync_mode = 1'b0;
          g_first   = {GW'(NG / 2), GW'(0)};
          g_end     = {GW'(NG - 1), GW'(NG / 2 - 1)};
        end
      end
      ST_FC: begin
        spk_rd_layer = 2'b11;
        zs_mode = cfg.two_ts ? ZS_C : ZS_B;
        if (fc_last) begin
          sync_mode = 1'b0;
          g_first   = {GW'(NG / 2), GW'(0)};
          g_end     = {GW'(NG - 1), GW'(NG / 2 - 1)};
        end
      end
      default: ;
    endcase
    unique case (state)
      ST_L0_INPUT: next_layer = ST_L0_REC;
      ST_L0_REC:   next_layer = ST_L1_FF;
      ST_L1_FF:    next_layer = ST_L1_REC;
      ST_L1_REC:   next_layer = ST_FC;
      default:     next_layer = ST_LOAD_IN;
    endcase
  end

  // Group loading.
  logic [1:0] adv;   // unit takes its next group this edge
  always_comb begin
    adv = '0;
    if (sub == SUB_RUN) begin
      if (sync_mode) begin
        if (zs_last[0] && zs_last[1] && (cur_grp[0] != g_end[0]))
          adv = 2'b11;
      end else begin
        for (int u = 0; u < 2; u++)
          adv[u] = zs_last[u] && !fin[u] && (cur_grp[u] != g_end[u]);
      end
    end
    for (int u = 0; u < 2; u++)
      ld_grp[u] = (sub == SUB_INIT) ? g_first[u] : cur_grp[u] + 1'b1;
    zs_load = (sub == SUB_INIT && state >= ST_L0_INPUT) ? 2'b11 : adv;
  end

  // Post-processing outputs.
  always_comb begin
    in_consume   = 1'b0;
    spk_we       = 1'b0;
    spk_wr_layer = (state == ST_L1_REC);
    spk_wr_ts    = 1'b0;
    lif_valid    = 1'b0;
    lif_first    = 1'b1;
    lif_layer    = (state == ST_L1_REC);
    stim_ts2     = 1'b0;
    stim_single  = !cfg.two_ts;
    fo_cmd       = FO_NONE;
    pe_clr       = (sub == SUB_INIT);
    if (sub == SUB_POST) begin
      unique case (state)
        ST_L0_INPUT: if (!fo_busy) begin
          fo_cmd     = FO_FF_SUM;
          in_consume = 1'b1;
        end
        ST_L1_FF: if (!fo_busy) fo_cmd = cfg.two_ts ? FO_FF_SEP : FO_FF_SUM;
        ST_L0_REC, ST_L1_REC: begin
          // step 0: LIF ts1; step 1: LIF ts2 and store ts1; step 2: store ts2
          unique case (post_step)
            2'd0: begin lif_valid = 1'b1; lif_first = 1'b1; end
            2'd1: begin
              spk_we = 1'b1; spk_wr_ts = 1'b0;
              if (cfg.two_ts) begin
                lif_valid = 1'b1; lif_first = 1'b0; stim_ts2 = 1'b1;
              end
            end
            default: begin spk_we = 1'b1; spk_wr_ts = 1'b1; end
          endcase
        end
        ST_FC: if (!fo_busy) fo_cmd = fc_last ? FO_OUT_SUM : FO_OUT_PAIR;
        default: ;
      endcase
    end
  end

  logic post_done;
  always_comb begin
    unique case (state)
      ST_L0_REC, ST_L1_REC: post_done = cfg.two_ts ? (post_step == 2'd2) : (post_step == 2'd1);
      default:              post_done = !fo_busy;
    endcase
  end

  assign ld_weights_ok = (state == ST_START) || (state == ST_LOAD_INSTR) || (state == ST_LOAD_W);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= ST_START;
      sub          <= SUB_INIT;
      post_step    <= '0;
      fin          <= '0;
      cur_grp      <= '0;
      cfg          <= '0;
      fc_pair      <= '0;
      fc_last      <= 1'b0;
      stop_req     <= 1'b0;
      cyc          <= '0;
      frame_cycles <= '0;
      frame_done   <= 1'b0;
      spk_clr      <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      spk_clr    <= 1'b0;
      if (cmd_stop) stop_req <= 1'b1;
      if (state >= ST_L0_INPUT) cyc <= cyc + 1'b1;
      unique case (state)
        ST_START: if (cmd_start) begin
          state    <= ST_LOAD_INSTR;
          stop_req <= 1'b0;
        end
        ST_LOAD_INSTR: begin
          cfg     <= cfg_in;
          spk_clr <= 1'b1;         // new sequence: no recurrent history
          state   <= ST_LOAD_W;
        end
        ST_LOAD_W:  if (cmd_wdone) state <= ST_LOAD_IN;
        ST_LOAD_IN: if (stop_req || cmd_stop) begin
          state <= ST_START;
        end else if (in_full) begin
          state   <= ST_L0_INPUT;
          sub     <= SUB_INIT;
          cyc     <= '0;
          fc_pair <= '0;
          fc_last <= (NPAIR == 0);
        end
        default: begin
          // layer states
          unique case (sub)
            SUB_INIT: begin
              cur_grp <= g_first;
              fin     <= '0;
              sub     <= SUB_RUN;
            end
            SUB_RUN: begin
              for (int u = 0; u < 2; u++) begin
                if (adv[u]) cur_grp[u] <= ld_grp[u];
                if (zs_last[u] && cur_grp[u] == g_end[u]) fin[u] <= 1'b1;
              end
              if (sync_mode ? (zs_last[0] && zs_last[1] && cur_grp[0] == g_end[0])
                            : ((fin[0] || (zs_last[0] && cur_grp[0] == g_end[0])) &&
                               (fin[1] || (zs_last[1] && cur_grp[1] == g_end[1]))))
                sub <= SUB_DRAIN;
            end
            SUB_DRAIN: begin
              sub       <= SUB_POST;
              post_step <= '0;
            end
            default: begin  // SUB_POST
              post_step <= post_step + 1'b1;
              if (post_done) begin
                sub <= SUB_INIT;
                if (state == ST_FC && !fc_last) begin
                  fc_pair <= fc_pair + 1'b1;
                  fc_last <= (int'(fc_pair) + 1 == NPAIR) && (NFG % 2 == 1);
                  if (int'(fc_pair) + 1 == NPAIR && NFG % 2 == 0) begin
                    state        <= stop_req ? ST_START : ST_LOAD_IN;
                    frame_done   <= 1'b1;
                    frame_cycles <= cyc + 1'b1;
                  end
                end else if (state == ST_FC) begin
                  state        <= stop_req ? ST_START : ST_LOAD_IN;
                  frame_done   <= 1'b1;
                  frame_cycles <= cyc + 1'b1;
                end else begin
                  state <= next_layer;
                end
              end
            end
          endcase
        end
      endcase
    end
  end

  // Lockstep layers keep both units on the same group.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      (sub == SUB_RUN && sync_mode) |-> (cur_grp[0] == cur_grp[1]));

endmodule
