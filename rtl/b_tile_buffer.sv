// b_tile_buffer -- ping-pong tile buffer of the packet matrix B.
//
// Each of the two banks holds a (TM+alpha) x TK block of B: TK packet
// columns, each a run of R = TM+alpha contiguous elements of one packet
// (R = 64 = one 512-bit memory beat).  A bank therefore covers R/TM
// consecutive row tiles T_j, which the array uses one after the other
// without reading memory again (decoupling of loading and computing).
//
// Write side (data mover): one whole column per cycle (wr_en, wr_bank,
// wr_col, wr_data = R elements, element r in bits r*N +: N).  Read side
// (CU controller): column rd_col, row tile rd_sub of bank rd_bank, returned
// combinationally as TM elements.  full[b] is set by fill_done and cleared
// by release, and is how the two sides hand a bank over: the mover fills a
// bank that is not full while the controller computes on the other.
module b_tile_buffer
  import bats_pkg::*;
#(
  parameter int unsigned TM = T_M,
  parameter int unsigned TK = T_K,
  parameter int unsigned R  = BEAT_BYTES,
  parameter int unsigned N  = ELEM_W,
  localparam int unsigned KW = $clog2(TK),
  localparam int unsigned SUBS = R / TM,
  localparam int unsigned SW = (SUBS > 1) ? $clog2(SUBS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // write side
  input  logic            wr_en,
  input  logic            wr_bank,
  input  logic [KW-1:0]   wr_col,
  input  logic [R*N-1:0]  wr_data,
  input  logic            fill_done,
  input  logic            fill_bank,
  // read side
  input  logic            rd_bank,
  input  logic [KW-1:0]   rd_col,
  input  logic [SW-1:0]   rd_sub,
  output logic [N-1:0]    b_col [TM],
  input  logic            release_en,
  input  logic            release_bank,
  output logic [1:0]      full
);

  logic [R*N-1:0] mem [2][TK];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_col] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0;
    end else begin
      if (fill_done)  full[fill_bank]    <= 1'b1;
      if (release_en) full[release_bank] <= 1'b0;
    end
  end

  always_comb begin
    for (int i = 0; i < TM; i++)
      b_col[i] = mem[rd_bank][rd_col][(int'(rd_sub) * TM + i) * N +: N];
  end

  // a bank is only filled when empty and only released when full
  a_fill_empty: assert property (@(posedge clk) disable iff (!rst_n)
                                 fill_done |-> !full[fill_bank]);
  a_release_full: assert property (@(posedge clk) disable iff (!rst_n)
                                   release_en |-> full[release_bank]);

endmodule
