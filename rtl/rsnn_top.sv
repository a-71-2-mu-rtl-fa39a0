// rsnn_top: recurrent spiking neural network speech recognition
// accelerator core.
//
// Per 10 ms frame it evaluates a two-layer recurrent spiking network
// (40 -> 128 -> 128 neurons, leaky integrate-and-fire, recurrent weights on
// both layers) and a 128 -> 1920 fully connected layer whose 1920 12-bit
// results are streamed out 4 per beat for a decoder. One or two SNN time
// steps are run per frame. Two PE sets of 128 accumulators compute the two
// time steps side by side, so each weight row is read once for both
// ("parallel time steps"); spike inputs are broadcast to all PEs of a set
// and zero spikes or zero input bits are skipped by two zero-skipping
// units. In the FC layer the spikes of the two time steps are merged (OR
// picks the rows to read, AND doubles the weight).
//
// Wiring follows the published block diagram: in buffer and spike register
// set feed the zero-skipping units, which drive the weight address
// generator and broadcast shift/enable to the PE sets; the PE sets feed the
// feed/out registers and their adders, which feed the LIF set, whose
// spikes return to the spike register set. All weights stay on chip in
// five single-port buffers (48, 192, 192, 960, 960 rows of 512 bits).
//
// Interface (the bus wrapper side; the DMA/AXI wrapper itself is outside):
//   ctrl_we/ctrl_wdata   32-bit control register write (see ctrl_reg)
//   ld_*                 128-bit load port, valid/ready. ld_addr[14:12]
//                        selects the target (ld_target_e), [11:2] the row,
//                        [1:0] the 128-bit quarter of the row; for the in
//                        buffer [1:0] is the beat of 16 input bytes.
//                        Weights are accepted only before the run (Start,
//                        Load Instructions, Load Weights); input beats
//                        whenever the in buffer is not full.
//   out_*                FC results, 4 x 12 bits per beat, valid/ready,
//                        groups of 128 values in output-neuron order.
//   state, frame_done, frame_cycles   status.
// Weight buffer reads take one cycle; the shift/enable going to the PEs
// are registered to line up with the read data.
// Lint note: verilator reports rst_n as used both asynchronously and
// synchronously. The synchronous use is only the 'disable iff' of the
// concurrent assertions here and in the controller and output registers;
// every flop uses it as an asynchronous reset, so the warning stands.
module rsnn_top
  import rsnn_pkg::*;
#(
  parameter int unsigned N       = 128,   // neurons per recurrent layer = PEs per set
  parameter int unsigned NIN     = 40,    // input features per frame
  parameter int unsigned IN_ROWS = 48,    // in buffer bytes / input weight rows
  parameter int unsigned NFC     = 1920,  // FC outputs
  parameter int unsigned FC_ROWS = 960,   // rows per FC weight buffer
  localparam int unsigned NG     = N / GRP,
  localparam int unsigned GW     = $clog2(IN_ROWS) > $clog2(NG) ? $clog2(IN_ROWS) : $clog2(NG),
  localparam int unsigned SP_ROWS = 3 * N / 2,
  localparam int unsigned WROW   = N * WBITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ctrl_we,
  input  logic [31:0]          ctrl_wdata,
  output logic [31:0]          ctrl_rdata,
  input  logic                 ld_valid,
  output logic                 ld_ready,
  input  logic [14:0]          ld_addr,
  input  logic [BUSW-1:0]      ld_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [3:0][ACCW-1:0] out_data,
  output logic                 out_last,
  output state_e               state,
  output logic                 frame_done,
  output logic [15:0]          frame_cycles
);

  localparam int unsigned IAW = $clog2(IN_ROWS);
  localparam int unsigned SAW = $clog2(SP_ROWS);
  localparam int unsigned FAW = $clog2(FC_ROWS);
  localparam int unsigned NQ  = WROW / BUSW;

  // ---------------------------------------------------------------- control
  cfg_t cfg_w, cfg;
  logic cmd_start, cmd_wdone, cmd_stop;

  logic               in_full, in_consume;
  zs_mode_e           zs_mode;
  logic [1:0]         zs_load, zs_valid, zs_last, zs_spk;
  logic [1:0][GW-1:0] ld_grp, cur_grp;
  logic               spk_clr, spk_we, spk_wr_layer, spk_wr_ts;
  logic [1:0]         spk_rd_layer;
  logic               pe_clr, lif_valid, lif_first, lif_layer;
  logic               stim_ts2, stim_single, fo_busy;
  logic [2:0]         fo_cmd;
  logic [3:0]         fc_pair;
  logic               fc_last, ld_weights_ok;

  rsnn_controller #(.N(N), .NIN(NIN), .NFC(NFC), .IN_ROWS(IN_ROWS)) u_ctrl (
    .clk, .rst_n,
    .cfg_in(cfg_w), .cmd_start, .cmd_wdone, .cmd_stop,
    .in_full, .in_consume,
    .zs_mode, .zs_load, .ld_grp, .cur_grp, .zs_last,
    .spk_clr, .spk_rd_layer, .spk_we, .spk_wr_layer, .spk_wr_ts,
    .pe_clr, .lif_valid, .lif_first, .lif_layer, .stim_ts2, .stim_single,
    .fo_cmd, .fo_busy,
    .state, .cfg, .fc_pair, .fc_last, .ld_weights_ok,
    .frame_done, .frame_cycles
  );

  ctrl_reg u_ctrl_reg (
    .clk, .rst_n, .we(ctrl_we), .wdata(ctrl_wdata), .rdata(ctrl_rdata),
    .st_running(state != ST_START), .st_wload(ld_weights_ok), .st_in_full(in_full),
    .frame_done,
    .cfg(cfg_w), .cmd_start, .cmd_wdone, .cmd_stop
  );

  // ---------------------------------------------------------------- load port
  ld_target_e ld_tgt;
  logic [9:0] ld_row;
  logic [1:0] ld_q;
  logic       in_wr_ready, ld_fire;

  assign ld_tgt   = ld_target_e'(ld_addr[14:12]);
  assign ld_row   = ld_addr[11:2];
  assign ld_q     = ld_addr[1:0];
  assign ld_ready = (ld_tgt == LT_INBUF) ? in_wr_ready : ld_weights_ok;
  assign ld_fire  = ld_valid && ld_ready;

  // ---------------------------------------------------------------- in buffer
  logic [INBITS-1:0] in_byte;

  in_buffer #(.DEPTH(IN_ROWS), .NIN(NIN)) u_in_buffer (
    .clk, .rst_n,
    .wr_en(ld_fire && ld_tgt == LT_INBUF), .wr_beat(ld_q), .wr_data(ld_data),
    .wr_ready(in_wr_ready), .consume(in_consume),
    .rd_idx(IAW'(ld_grp[0])), .rd_data(in_byte), .full(in_full)
  );

  // ---------------------------------------------------------------- spikes
  logic [1:0][GRP-1:0] spk_a, spk_b;
  logic [N-1:0]        lif_spk;

  spike_reg_set #(.N(N)) u_spike_reg_set (
    .clk, .rst_n, .clr(spk_clr),
    .we(spk_we), .wr_layer(spk_wr_layer), .wr_ts(spk_wr_ts), .wr_data(lif_spk),
    .rd_layer(spk_rd_layer),
    .rd_grp({$clog2(NG)'(ld_grp[1]), $clog2(NG)'(ld_grp[0])}),
    .rd_a(spk_a), .rd_b(spk_b)
  );

  // ---------------------------------------------------------------- zero skipping
  logic [1:0][GRP-1:0] zs_a, zs_b;
  logic [1:0][2:0]     zs_idx;
  logic [1:0][SHW-1:0] zs_sh;

  always_comb begin
    unique case (zs_mode)
      ZS_A: begin   // low nibble to set 1, high nibble to set 2
        zs_a[0] = {4'b0000, in_byte[3:0]};
        zs_a[1] = {in_byte[7:4], 4'b0000};
        zs_b    = '0;
      end
      ZS_D: begin   // time step 1 to set 1, time step 2 to set 2
        zs_a[0] = spk_a[0];
        zs_a[1] = spk_b[1];
        zs_b    = '0;
      end
      default: begin
        zs_a = spk_a;
        zs_b = spk_b;
      end
    endcase
  end

  for (genvar u = 0; u < 2; u++) begin : g_zs
    zero_skip u_zs (
      .clk, .rst_n, .mode(zs_mode), .load(zs_load[u]),
      .grp_a(zs_a[u]), .grp_b(zs_b[u]),
      .emit_valid(zs_valid[u]), .emit_idx(zs_idx[u]), .emit_sh(zs_sh[u]),
      .emit_spk(zs_spk[u]), .last(zs_last[u])
    );
  end

  // ---------------------------------------------------------------- addresses
  logic                in_en;
  logic [IAW-1:0]      in_addr;
  logic [1:0]          sp_en, fc_en;
  logic [1:0][SAW-1:0] sp_addr;
  logic [1:0][FAW-1:0] fc_addr;
  wsrc_e [1:0]         src, src_q;
  logic                state_layer;

  assign state_layer = (state >= ST_L0_INPUT);

  weight_addr_gen #(.N(N), .IN_ROWS(IN_ROWS), .FC_ROWS(FC_ROWS)) u_wag (
    .state, .two_ts(cfg.two_ts), .fc_pair, .fc_last,
    .grp(cur_grp), .idx(zs_idx), .valid(zs_valid & {2{state_layer}}),
    .in_en, .in_addr, .sp_en, .sp_addr, .fc_en, .fc_addr, .src
  );

  // ---------------------------------------------------------------- weight buffers
  logic [WROW-1:0] wload, rd_in, rd_sp0, rd_sp1, rd_fc1, rd_fc2;
  logic [NQ-1:0]   qmask;

  assign wload = {NQ{ld_data}};
  assign qmask = NQ'(1) << ld_q;

  function automatic logic ld_hit(ld_target_e t);
    return ld_fire && ld_tgt == t;
  endfunction

  weight_sram #(.DEPTH(IN_ROWS), .WIDTH(WROW)) u_wbuf_in (
    .clk, .en(in_en | ld_hit(LT_WIN)), .we(ld_hit(LT_WIN)),
    .addr(ld_hit(LT_WIN) ? IAW'(ld_row) : in_addr),
    .wmask(qmask), .wdata(wload), .rdata(rd_in)
  );
  weight_sram #(.DEPTH(SP_ROWS), .WIDTH(WROW)) u_wbuf_sp0 (
    .clk, .en(sp_en[0] | ld_hit(LT_WSP0)), .we(ld_hit(LT_WSP0)),
    .addr(ld_hit(LT_WSP0) ? SAW'(ld_row) : sp_addr[0]),
    .wmask(qmask), .wdata(wload), .rdata(rd_sp0)
  );
  weight_sram #(.DEPTH(SP_ROWS), .WIDTH(WROW)) u_wbuf_sp1 (
    .clk, .en(sp_en[1] | ld_hit(LT_WSP1)), .we(ld_hit(LT_WSP1)),
    .addr(ld_hit(LT_WSP1) ? SAW'(ld_row) : sp_addr[1]),
    .wmask(qmask), .wdata(wload), .rdata(rd_sp1)
  );
  weight_sram #(.DEPTH(FC_ROWS), .WIDTH(WROW)) u_wbuf_fc1 (
    .clk, .en(fc_en[0] | ld_hit(LT_WFC1)), .we(ld_hit(LT_WFC1)),
    .addr(ld_hit(LT_WFC1) ? FAW'(ld_row) : fc_addr[0]),
    .wmask(qmask), .wdata(wload), .rdata(rd_fc1)
  );
  weight_sram #(.DEPTH(FC_ROWS), .WIDTH(WROW)) u_wbuf_fc2 (
    .clk, .en(fc_en[1] | ld_hit(LT_WFC2)), .we(ld_hit(LT_WFC2)),
    .addr(ld_hit(LT_WFC2) ? FAW'(ld_row) : fc_addr[1]),
    .wmask(qmask), .wdata(wload), .rdata(rd_fc2)
  );

  // ---------------------------------------------------------------- PE sets
  logic [1:0]          pe_en_q;
  logic [1:0][SHW-1:0] pe_sh_q;
  logic [1:0][WROW-1:0] wrow;
  logic signed [N-1:0][ACCW-1:0] acc1, acc2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pe_en_q <= '0;
      pe_sh_q <= '0;
      src_q   <= {WS_IN, WS_IN};
    end else begin
      for (int u = 0; u < 2; u++) begin
        pe_en_q[u] <= state_layer && zs_valid[u] && zs_spk[u];
        pe_sh_q[u] <= zs_sh[u];
      end
      src_q <= src;
    end
  end

  always_comb begin
    for (int u = 0; u < 2; u++) begin
      unique case (src_q[u])
        WS_IN:   wrow[u] = rd_in;
        WS_SP0:  wrow[u] = rd_sp0;
        WS_SP1:  wrow[u] = rd_sp1;
        WS_FC1:  wrow[u] = rd_fc1;
        default: wrow[u] = rd_fc2;
      endcase
    end
  end

  pe_set #(.N(N)) u_pe_set1 (
    .clk, .rst_n, .clr(pe_clr), .en(pe_en_q[0]), .sh(pe_sh_q[0]), .wrow(wrow[0]), .acc(acc1)
  );
  pe_set #(.N(N)) u_pe_set2 (
    .clk, .rst_n, .clr(pe_clr), .en(pe_en_q[1]), .sh(pe_sh_q[1]), .wrow(wrow[1]), .acc(acc2)
  );

  // ---------------------------------------------------------------- feed/out, LIF
  logic signed [N-1:0][ACCW-1:0] stim;

  feed_out_regs #(.N(N)) u_feed_out (
    .clk, .rst_n, .cmd(fo_cmd), .acc1, .acc2,
    .stim_ts2, .single(stim_single), .stim, .busy(fo_busy),
    .out_valid, .out_ready, .out_data, .out_last
  );

  lif_set #(.N(N)) u_lif_set (
    .clk, .rst_n, .valid(lif_valid), .first(lif_first),
    .beta_sh(lif_layer ? cfg.beta_sh1 : cfg.beta_sh0),
    .vth_exp(lif_layer ? cfg.vth_exp1 : cfg.vth_exp0),
    .stim, .spk(lif_spk)
  );

  // Weight buffers are single-port: loads only happen outside the layer states.
  a_no_load_while_running: assert property (@(posedge clk) disable iff (!rst_n)
      (ld_fire && ld_tgt != LT_INBUF) |-> !state_layer);

endmodule
