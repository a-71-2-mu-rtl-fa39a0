// pe_set: a set of N processing elements (128 in the published design,
// drawn as 4 x 32 PEs), one set per time step.
//
// All PEs of a set receive the same broadcast enable and shift value from
// their zero-skipping unit; PE j takes weight j, bits [4j+3:4j], of the
// 512-bit weight row read from a weight buffer. Accumulators are exposed as
// a flat array so the feed/out register adders can read them. Timing is that
// of the PE: one accumulate per cycle, result visible after the edge.
module pe_set
  import rsnn_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr,
  input  logic                          en,
  input  logic [SHW-1:0]                sh,
  input  logic [N*WBITS-1:0]            wrow,
  output logic signed [N-1:0][ACCW-1:0] acc
);

  for (genvar j = 0; j < N; j++) begin : g_pe
    pe u_pe (
      .clk  (clk),
      .rst_n(rst_n),
      .clr  (clr),
      .en   (en),
      .sh   (sh),
      .w    (wrow[j*WBITS +: WBITS]),
      .acc  (acc[j])
    );
  end

endmodule
