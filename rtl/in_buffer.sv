// in_buffer: the 48 x 8-bit input feature buffer.
//
// One frame of NIN (40) 8-bit features is written over the 128-bit
// internal bus, 16 bytes per beat, byte k of the frame at bits [8k+7:8k]
// of beat k/16. Writing the beat that holds the last feature marks the
// buffer full. The L0-input layer reads one byte per group (rd_idx) and
// clears the flag with consume when it is done, so the next frame can be
// loaded while the other layers run (the interleaving the publication
// mentions). Writes are accepted only while the buffer is not full
// (wr_ready). The full/consume protocol is this design's choice.
//
// Timing: writes on the clock edge; the read is combinational.
module in_buffer
  import rsnn_pkg::*;
#(
  parameter int unsigned DEPTH = 48,
  parameter int unsigned NIN   = 40,
  localparam int unsigned BPB   = BUSW / INBITS,              // bytes per beat
  localparam int unsigned NBEAT = (DEPTH + BPB - 1) / BPB,
  localparam int unsigned BW    = (NBEAT > 1) ? $clog2(NBEAT) : 1,
  localparam int unsigned IW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [BW-1:0]     wr_beat,
  input  logic [BUSW-1:0]   wr_data,
  output logic              wr_ready,
  input  logic              consume,
  input  logic [IW-1:0]     rd_idx,
  output logic [INBITS-1:0] rd_data,
  output logic              full
);

  localparam int unsigned LAST_BEAT = (NIN - 1) / BPB;

  logic [DEPTH-1:0][INBITS-1:0] mem;

  assign wr_ready = !full;
  assign rd_data  = mem[rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem  <= '0;
      full <= 1'b0;
    end else begin
      if (wr_en && !full) begin
        for (int b = 0; b < BPB; b++)
          if (int'(wr_beat) * BPB + b < DEPTH)
            mem[int'(wr_beat) * BPB + b] <= wr_data[b*INBITS +: INBITS];
        if (wr_beat == BW'(LAST_BEAT)) full <= 1'b1;
      end
      if (consume) full <= 1'b0;
    end
  end

endmodule
