// spike_reg_set: the spike register set.
//
// Holds the output spikes of both recurrent layers for both time steps,
// 2 layers x 2 time steps x N bits. The LIF set writes one (layer, time
// step) vector at a time. Two read ports, one per zero-skipping unit, each
// return an 8-spike group of the selected layer for time step 1 (rd_a) and
// time step 2 (rd_b), which is what types B, C and D consume. The previous
// frame's spikes stay here until the layer overwrites them, so they act as
// the recurrent input h[t-1]. clr zeroes everything (start of a sequence).
// The publication names the block and its use; its organisation as two
// 8-bit read ports is this design's choice.
//
// Timing: writes on the clock edge; reads are combinational.
module spike_reg_set
  import rsnn_pkg::*;
#(
  parameter int unsigned N  = 128,
  localparam int unsigned NG = N / GRP,
  localparam int unsigned GW = (NG > 1) ? $clog2(NG) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  logic           we,
  input  logic           wr_layer,
  input  logic           wr_ts,
  input  logic [N-1:0]   wr_data,
  input  logic [1:0]     rd_layer,
  input  logic [1:0][GW-1:0] rd_grp,
  output logic [1:0][GRP-1:0] rd_a,
  output logic [1:0][GRP-1:0] rd_b
);

  logic [1:0][1:0][N-1:0] spk;   // [layer][ts]

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   spk <= '0;
    else if (clr) spk <= '0;
    else if (we)  spk[wr_layer][wr_ts] <= wr_data;
  end

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      rd_a[p] = spk[rd_layer[p]][0][rd_grp[p]*GRP +: GRP];
      rd_b[p] = spk[rd_layer[p]][1][rd_grp[p]*GRP +: GRP];
    end
  end

endmodule
