// feed_out_regs: feedforward/output registers 1 and 2 with their adders.
//
// Two banks of N 12-bit registers, one per PE set, and the saturating
// adders that combine the PE set accumulators:
//   FO_FF_SUM  reg1 = reg2 = acc1 + acc2   (L0-input: both halves of the
//              input bits; L1-feedforward with one time step)
//   FO_FF_SEP  reg1 = acc1, reg2 = acc2    (L1-feedforward, two time steps)
//   FO_OUT_PAIR reg1 = acc1, reg2 = acc2, then stream reg1 and reg2 out
//   FO_OUT_SUM reg1 = acc1 + acc2, then stream reg1 (the split last FC group)
// The LIF stimulus is formed here too: with two time steps
// stim(ts1) = acc1 + reg1 and stim(ts2) = acc2 + reg2; with one time step
// stim = (acc1 + acc2) + reg1. FC results leave 4 values per beat, as
// published, over a valid/ready handshake, lowest neuron index first;
// out_last marks the last beat of each 128-value group. A new command that
// writes the registers must wait while busy (the controller stalls).
// Lint note: rst_n is also used in the 'disable iff' of the assertion
// below, which verilator reports as a synchronous use; the flops use it
// only as an asynchronous reset, so the warning stands.
module feed_out_regs
  import rsnn_pkg::*;
#(
  parameter int unsigned N = 128,
  localparam int unsigned NB = N / 4,
  localparam int unsigned BW = $clog2(NB)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [2:0]                    cmd,
  input  logic signed [N-1:0][ACCW-1:0] acc1,
  input  logic signed [N-1:0][ACCW-1:0] acc2,
  input  logic                          stim_ts2,
  input  logic                          single,
  output logic signed [N-1:0][ACCW-1:0] stim,
  output logic                          busy,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [3:0][ACCW-1:0]          out_data,
  output logic                          out_last
);

  localparam logic [2:0] FO_NONE = 3'd0, FO_FF_SUM = 3'd1, FO_FF_SEP = 3'd2,
                         FO_OUT_PAIR = 3'd3, FO_OUT_SUM = 3'd4;

  logic signed [N-1:0][ACCW-1:0] r1, r2, sum12;
  logic [BW-1:0] beat;
  logic          bank;     // 0: streaming reg1, 1: reg2
  logic          two;      // reg2 still to stream after reg1

  always_comb begin
    for (int j = 0; j < N; j++) begin
      sum12[j] = sat_add(acc1[j], acc2[j]);
      if (single)        stim[j] = sat_add(sum12[j], r1[j]);
      else if (stim_ts2) stim[j] = sat_add(acc2[j], r2[j]);
      else               stim[j] = sat_add(acc1[j], r1[j]);
    end
    for (int k = 0; k < 4; k++)
      out_data[k] = bank ? r2[int'(beat) * 4 + k] : r1[int'(beat) * 4 + k];
    out_last = (beat == BW'(NB - 1));
  end

  assign busy = out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1 <= '0;
      r2 <= '0;
      beat <= '0;
      bank <= 1'b0;
      two <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      unique case (cmd)
        FO_FF_SUM:   begin r1 <= sum12; r2 <= sum12; end
        FO_FF_SEP:   begin r1 <= acc1;  r2 <= acc2;  end
        FO_OUT_PAIR: begin r1 <= acc1;  r2 <= acc2;  out_valid <= 1'b1;
                           beat <= '0; bank <= 1'b0; two <= 1'b1; end
        FO_OUT_SUM:  begin r1 <= sum12; out_valid <= 1'b1;
                           beat <= '0; bank <= 1'b0; two <= 1'b0; end
        default: ;
      endcase
      if (out_valid && out_ready) begin
        beat <= beat + 1'b1;
        if (out_last) begin
          if (two && !bank) bank <= 1'b1;
          else              out_valid <= 1'b0;
        end
      end
    end
  end

  // The registers are not rewritten while a group is being streamed.
  a_no_write_busy: assert property (@(posedge clk) disable iff (!rst_n)
      busy |-> (cmd == FO_NONE));

endmodule
