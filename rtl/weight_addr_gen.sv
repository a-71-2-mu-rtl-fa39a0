// weight_addr_gen: weight address generator.
//
// Turns the nonzero index emitted by each zero-skipping unit, together with
// the group being scanned and the layer phase, into a row address for each
// of the five weight buffers, and says which buffer feeds each PE set.
// Row layout (this design's choice; the buffer sizes are the published ones):
//   input buffer (48 rows)   row = input feature index (0..39)
//   spike buffer 1/2 (192)   row = L*64 + (i mod 64), L = 0 for L0-recurrent,
//                            1 for L1-feedforward, 2 for L1-recurrent;
//                            buffer 1 holds spike inputs 0..63, buffer 2 64..127
//   FC buffer 1/2 (960)      row = p*128 + i for output group 2p (buffer 1)
//                            and 2p+1 (buffer 2), p = 0..6; the odd 15th
//                            group (rows 896..959) is split by input: inputs
//                            0..63 in buffer 1, 64..127 in buffer 2.
// Two time steps in recurrent layers share one row between both PE sets;
// one time step gives each PE set its own spike buffer, as published.
//
// Timing: purely combinational; the buffers register the address.
module weight_addr_gen
  import rsnn_pkg::*;
#(
  parameter int unsigned N      = 128,
  parameter int unsigned IN_ROWS = 48,
  parameter int unsigned FC_ROWS = 960,
  localparam int unsigned NG    = N / GRP,
  localparam int unsigned GW    = $clog2(IN_ROWS) > $clog2(NG) ? $clog2(IN_ROWS) : $clog2(NG),
  localparam int unsigned SP_ROWS = 3 * N / 2,
  localparam int unsigned IAW   = $clog2(IN_ROWS),
  localparam int unsigned SAW   = $clog2(SP_ROWS),
  localparam int unsigned FAW   = $clog2(FC_ROWS),
  localparam int unsigned IXW   = $clog2(N)
) (
  input  state_e              state,
  input  logic                two_ts,
  input  logic [3:0]          fc_pair,
  input  logic                fc_last,
  input  logic [1:0][GW-1:0]  grp,
  input  logic [1:0][2:0]     idx,
  input  logic [1:0]          valid,
  output logic                in_en,
  output logic [IAW-1:0]      in_addr,
  output logic [1:0]          sp_en,
  output logic [1:0][SAW-1:0] sp_addr,
  output logic [1:0]          fc_en,
  output logic [1:0][FAW-1:0] fc_addr,
  output wsrc_e [1:0]         src
);

  logic [1:0][IXW-1:0] i;     // spike input index per unit
  logic [1:0]          lsel;

  always_comb begin
    in_en   = 1'b0;
    in_addr = IAW'(grp[0]);
    sp_en   = '0;
    sp_addr = '0;
    fc_en   = '0;
    fc_addr = '0;
    src     = {WS_IN, WS_IN};
    for (int u = 0; u < 2; u++) i[u] = IXW'(grp[u] * GRP + idx[u]);
    unique case (state)
      ST_L0_REC: lsel = 2'd0;
      ST_L1_FF:  lsel = 2'd1;
      default:   lsel = 2'd2;
    endcase

    unique case (state)
      ST_L0_INPUT: begin
        // Both PE sets use the row of the input byte being scanned.
        in_en = valid[0] | valid[1];
      end
      ST_L0_REC, ST_L1_FF, ST_L1_REC: begin
        if (two_ts) begin
          // Shared row, fetched once for both time steps.
          for (int b = 0; b < 2; b++)
            sp_addr[b] = SAW'(lsel * (N / 2) + (int'(i[0]) % (N / 2)));
          sp_en[int'(i[0]) / (N / 2)] = valid[0];
          src = (int'(i[0]) >= N / 2) ? {WS_SP1, WS_SP1} : {WS_SP0, WS_SP0};
        end else begin
          for (int b = 0; b < 2; b++) begin
            sp_addr[b] = SAW'(lsel * (N / 2) + (int'(i[b]) % (N / 2)));
            sp_en[b]   = valid[b];
          end
          src = {WS_SP1, WS_SP0};
        end
      end
      ST_FC: begin
        for (int b = 0; b < 2; b++) begin
          fc_addr[b] = fc_last ? FAW'(int'(fc_pair) * N + (int'(i[b]) % (N / 2)))
                               : FAW'(int'(fc_pair) * N + i[b]);
          fc_en[b]   = valid[b];
        end
        src = {WS_FC2, WS_FC1};
      end
      default: ;
    endcase
  end

endmodule
