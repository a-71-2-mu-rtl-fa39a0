// pe: one processing element of the spiking accelerator.
//
// A PE is an accumulator. Its 4-bit signed weight passes through a left
// shifter (0..7 bits, the broadcast shift value) and a mux that selects the
// shifted weight or zero; the result is added into a 12-bit accumulator.
// The shifter serves the bit-serial input layer (shift = bit position of the
// input bit) and the merged-spike FC layer (shift 1 when both time steps
// spiked). The published PE holds exactly these three parts; the saturating
// accumulate (instead of wrap-around) is this design's choice.
//
// Interface: clr zeroes the accumulator; en adds (w << sh) on the rising
// edge; clr wins over en. acc is the registered sum, valid one cycle after
// the enabling edge.
module pe
  import rsnn_pkg::*;
#(
  parameter int unsigned W_W   = WBITS,
  parameter int unsigned ACC_W = ACCW
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    en,
  input  logic [SHW-1:0]          sh,
  input  logic signed [W_W-1:0]   w,
  output logic signed [ACC_W-1:0] acc
);

  logic signed [ACC_W-1:0] w_ext, w_sh;
  logic signed [ACC_W:0]   sum;
  logic signed [ACC_W-1:0] sum_sat;

  always_comb begin
    w_ext = ACC_W'(w);                     // sign extension
    w_sh  = w_ext <<< sh;                  // |w| <= 8, so << 7 fits 12 bits
    sum   = {acc[ACC_W-1], acc} + {w_sh[ACC_W-1], w_sh};
    if (sum[ACC_W] != sum[ACC_W-1])
      sum_sat = sum[ACC_W] ? {1'b1, {(ACC_W-1){1'b0}}} : {1'b0, {(ACC_W-1){1'b1}}};
    else
      sum_sat = sum[ACC_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    acc <= '0;
    else if (clr)  acc <= '0;
    else if (en)   acc <= sum_sat;
  end

endmodule
