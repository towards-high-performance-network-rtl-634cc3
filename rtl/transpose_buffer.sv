// transpose_buffer -- ping-pong output buffer of a BATS CU.
//
// Two banks of TM x M elements.  The X tiles (TM x TN) leave the systolic
// array one PE at a time; each result X[i][j] of column tile n is stored at
// element (n*TN + j)*TM + i of the bank named in its tag, i.e. transposed,
// so that each coded packet's TM elements lie next to each other.  When the
// last result of the last column tile arrives (PE(TM-1,TN-1), n = M/TN-1)
// the bank is full and is streamed out as BEAT_W-bit beats to consecutive
// byte addresses starting at the address given when the bank was allocated.
//
// Allocation implements the ping-pong rule: the controller may start filling
// bank `alloc_bank` only when it is free (alloc_ready); after a bank is
// filled the controller moves to the other one, and if that one has not yet
// been written back it waits (stall).  Each bank is TM*M*N bits = 2 beats.
// Interface: alloc/alloc_addr/alloc_ready/alloc_bank; array results;
// out_valid/out_ready/out_req; idle when nothing is allocated or pending.
module transpose_buffer
  import bats_pkg::*;
#(
  parameter int unsigned TM = T_M,
  parameter int unsigned TN = T_N,
  parameter int unsigned M  = BATCH_M,
  parameter int unsigned N  = ELEM_W,
  localparam int unsigned NT = M / TN,
  localparam int unsigned BANK_W = TM * M * N,
  localparam int unsigned BEATS  = BANK_W / BEAT_W,
  localparam int unsigned BTW    = (BEATS > 1) ? $clog2(BEATS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // allocation by the controller
  input  logic          alloc,
  input  addr_t         alloc_addr,
  output logic          alloc_ready,
  output logic          alloc_bank,
  // results from the systolic array
  input  logic [N-1:0]  res       [TM][TN],
  input  logic          res_valid [TM][TN],
  input  logic [3:0]    res_tag   [TM][TN],
  // write-back stream
  output logic          out_valid,
  input  logic          out_ready,
  output wr_req_t       out_req,
  output logic          idle
);

  typedef enum logic [1:0] {FREE, FILLING, FULL} bstate_e;

  logic [BANK_W-1:0] mem   [2];
  bstate_e           state [2];
  addr_t             baddr [2];
  logic              wr_ptr;          // bank handed out next
  logic              rd_ptr;          // bank streamed next
  logic [BTW-1:0]    beat;

  assign alloc_ready = (state[wr_ptr] == FREE);
  assign alloc_bank  = wr_ptr;

  // result writes: one element per PE, transposed placement
  always_ff @(posedge clk) begin
    for (int i = 0; i < TM; i++)
      for (int j = 0; j < TN; j++)
        if (res_valid[i][j])
          mem[res_tag[i][j][3]][((int'(res_tag[i][j][2:0]) * TN + j) * TM + i) * N +: N]
            <= res[i][j];
  end

  logic tile_done;
  logic tile_bank;
  assign tile_done = res_valid[TM-1][TN-1] && (int'(res_tag[TM-1][TN-1][2:0]) == NT - 1);
  assign tile_bank = res_tag[TM-1][TN-1][3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state[0] <= FREE;
      state[1] <= FREE;
      baddr[0] <= '0;
      baddr[1] <= '0;
      wr_ptr   <= 1'b0;
      rd_ptr   <= 1'b0;
      beat     <= '0;
    end else begin
      if (alloc && alloc_ready) begin
        state[wr_ptr] <= FILLING;
        baddr[wr_ptr] <= alloc_addr;
        wr_ptr        <= ~wr_ptr;
      end
      if (tile_done) state[tile_bank] <= FULL;
      if (out_valid && out_ready) begin
        if (int'(beat) == BEATS - 1) begin
          beat          <= '0;
          state[rd_ptr] <= FREE;
          rd_ptr        <= ~rd_ptr;
        end else begin
          beat <= beat + 1'b1;
        end
      end
    end
  end

  assign out_valid    = (state[rd_ptr] == FULL);
  assign out_req.addr = baddr[rd_ptr] + addr_t'(int'(beat) * BEAT_BYTES);
  assign out_req.data = mem[rd_ptr][int'(beat) * BEAT_W +: BEAT_W];
  assign idle         = (state[0] == FREE) && (state[1] == FREE);

  a_fill_alloc: assert property (@(posedge clk) disable iff (!rst_n)
                                 tile_done |-> state[tile_bank] == FILLING);

endmodule
