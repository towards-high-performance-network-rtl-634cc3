// g_tile_buffer -- tile buffer of the generator matrix, feeding the top of
// the systolic array.
//
// Holds the M/TN column tiles (TK x TN coefficients each) of the current
// batch's generator matrix; with M = 16 and TN = 8 these are two tiles.
// Tile n is read while the array computes the X tiles of column block n.
// The writer stores one full row k of G per cycle (M coefficients, as they
// come out of the ROM) into all tiles at once; the reader gets row k of
// tile n combinationally (no read latency).
// The published design uses a ping-pong pair of TK x TN tiles refilled by
// the mover.  Here the whole G of a batch (32 x 16 two-bit entries) stays
// resident instead, because every row tile of the batch reuses it; the
// reload between batches costs dg+2 cycles against 64*dg compute cycles.
module g_tile_buffer
  import bats_pkg::*;
#(
  parameter int unsigned TK = T_K,
  parameter int unsigned TN = T_N,
  parameter int unsigned M  = BATCH_M,
  parameter int unsigned S  = BV_S,
  localparam int unsigned NT = M / TN,
  localparam int unsigned KW = $clog2(TK),
  localparam int unsigned NW = (NT > 1) ? $clog2(NT) : 1
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [KW-1:0]   wr_row,
  input  logic [M*S-1:0]  wr_data,
  input  logic [NW-1:0]   rd_tile,
  input  logic [KW-1:0]   rd_row,
  output logic [S-1:0]    g_row [TN]
);

  logic [TN*S-1:0] mem [NT][TK];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int n = 0; n < NT; n++)
        mem[n][wr_row] <= wr_data[n*TN*S +: TN*S];
  end

  always_comb begin
    for (int j = 0; j < TN; j++)
      g_row[j] = mem[rd_tile][rd_row][j*S +: S];
  end

endmodule
