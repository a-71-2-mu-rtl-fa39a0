// lif_set: N leaky integrate-and-fire neurons (the "LIF module set").
//
// Per neuron, following the published LIF datapath: an adder sums the input
// stimulus with the previous membrane potential scaled by the decay factor
// beta; a comparator against the threshold Vth produces the spike, which is
// stored in the spike output register; a mux writes either the new membrane
// value or zero (after a spike) back into the membrane register. This is
//   U[ts] = stim[ts] + beta * U[ts-1] * (1 - s[ts-1]),  s[ts] = (U[ts] >= Vth).
// beta and Vth are powers of two, as in the publication: beta = 2^-beta_sh
// (an arithmetic right shift) and Vth = 2^vth_exp. The membrane carries only
// from time step 1 to time step 2 of the same frame; first = 1 marks time
// step 1, where the previous membrane counts as zero. The DFF of the
// published drawing is the membrane register itself here.
//
// Timing: one time step per cycle. On a valid edge spk and the membrane are
// updated; spk is valid the cycle after.
module lif_set
  import rsnn_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          valid,
  input  logic                          first,
  input  logic [2:0]                    beta_sh,
  input  logic [3:0]                    vth_exp,
  input  logic signed [N-1:0][ACCW-1:0] stim,
  output logic [N-1:0]                  spk
);

  logic signed [N-1:0][ACCW-1:0] mem;
  logic signed [N-1:0][ACCW-1:0] u;
  logic [N-1:0]                  fire;
  int                            vth;
  logic signed [ACCW-1:0]        mem_j, leak_j;

  always_comb begin
    vth = 1 << vth_exp;
    for (int j = 0; j < N; j++) begin
      mem_j   = mem[j];
      leak_j  = first ? ACCW'(0) : (mem_j >>> beta_sh);
      u[j]    = sat_add(stim[j], leak_j);
      fire[j] = (int'($signed(u[j])) >= vth);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem <= '0;
      spk <= '0;
    end else if (valid) begin
      spk <= fire;
      for (int j = 0; j < N; j++)
        mem[j] <= fire[j] ? '0 : u[j];
    end
  end

endmodule
