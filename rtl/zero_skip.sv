// zero_skip: reconfigurable zero-skipping unit (one per PE set).
//
// A group of 8 bits is loaded and then scanned, lowest index first, one
// emission per cycle. Each emission carries the bit index (the "nonzero
// index" sent to the weight address generator), the shift value broadcast
// to the PE shifters, and a spike bit that gates the PE mux. The four
// published configurations:
//   A  input feature bits; zero bits skipped, shift = bit index.
//   B  one time step of spikes; zero spikes skipped, shift = 0.
//   C  two time steps merged for the FC layer: the group is A OR B, zero
//      positions skipped, shift = (A AND B) at the index (weight x2 when
//      both time steps spiked).
//   D  two time steps in recurrent layers: no skipping, all 8 positions are
//      emitted and the spike bit itself is broadcast to gate the PEs.
// A 3-bit priority encoder and a pending mask implement the scan; this
// structure is this design's choice, the behaviour of A-D follows the
// publication.
//
// Timing: load takes grp_a/grp_b on the clock edge (it replaces whatever is
// pending). emit_* are combinational from the pending mask. last is high
// when the current emission is the final one of the group or nothing is
// pending, so the controller can load the next group on the same edge and
// no cycle is lost between nonzero groups; an all-zero group costs one
// cycle.
module zero_skip
  import rsnn_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  zs_mode_e        mode,
  input  logic            load,
  input  logic [GRP-1:0]  grp_a,
  input  logic [GRP-1:0]  grp_b,
  output logic            emit_valid,
  output logic [2:0]      emit_idx,
  output logic [SHW-1:0]  emit_sh,
  output logic            emit_spk,
  output logic            last
);

  logic [GRP-1:0] pend;    // positions still to emit
  logic [GRP-1:0] andm;    // A AND B (type C)
  logic [GRP-1:0] spk;     // spike bits (type D)
  zs_mode_e       mode_q;
  logic [GRP-1:0] rest;

  always_comb begin
    emit_idx = '0;
    for (int i = GRP - 1; i >= 0; i--)
      if (pend[i]) emit_idx = 3'(i);
    emit_valid = |pend;
    rest       = pend & ~(GRP'(1) << emit_idx);
    last       = (rest == '0);
    unique case (mode_q)
      ZS_A:    emit_sh = emit_idx;
      ZS_C:    emit_sh = {2'b00, andm[emit_idx]};
      default: emit_sh = '0;
    endcase
    emit_spk = (mode_q == ZS_D) ? spk[emit_idx] : emit_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend   <= '0;
      andm   <= '0;
      spk    <= '0;
      mode_q <= ZS_B;
    end else if (load) begin
      mode_q <= mode;
      spk    <= grp_a;
      andm   <= grp_a & grp_b;
      unique case (mode)
        ZS_C:    pend <= grp_a | grp_b;
        ZS_D:    pend <= '1;
        default: pend <= grp_a;
      endcase
    end else begin
      pend <= rest;
    end
  end

endmodule
