// weight_sram: single-port weight buffer, DEPTH rows of 512 bits.
//
// Each row holds 128 4-bit signed weights, weight j at bits [4j+3:4j], i.e.
// one weight for every PE of a set. The publication uses single-port SRAM
// macros of 48, 192 and 960 rows (150 KB in total); this file is the
// synthesizable array that stands for such a macro. A row is written in
// 128-bit quarters (wmask selects the quarters) from the internal bus.
//
// Timing: synchronous. With en and we the masked quarters are written; with
// en and not we, rdata shows the row one cycle later and holds it until the
// next read.
module weight_sram
  import rsnn_pkg::*;
#(
  parameter int unsigned DEPTH = 960,
  parameter int unsigned WIDTH = 512,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned NQ    = WIDTH / BUSW
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [NQ-1:0]    wmask,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int q = 0; q < NQ; q++)
          if (wmask[q]) mem[addr][q*BUSW +: BUSW] <= wdata[q*BUSW +: BUSW];
      end else begin
        rdata <= mem[addr];
      end
    end
  end

endmodule
