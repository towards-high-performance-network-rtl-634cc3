// gmat_mover -- generator matrix mover.
//
// On `start` (from the CU controller, on behalf of the scheduler) it copies
// the dg rows of generator matrix G_row from the ROM into the G tile buffer,
// one row per clock: ROM address bg_offset(row)+k is issued in cycle k and
// its data written to tile-buffer row k one cycle later.  `done` pulses in
// the cycle after the last write; `busy` is high from start until then.
// Load time is dg+1 cycles, hidden behind the first B-tile read from HBM.
module gmat_mover
  import bats_pkg::*;
#(
  parameter int unsigned M     = BATCH_M,
  parameter int unsigned S     = BV_S,
  parameter int unsigned TK    = T_K,
  parameter int unsigned DEPTH = BG_EDGES,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned KW   = $clog2(TK)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [7:0]      row,
  output logic            busy,
  output logic            done,
  // ROM read port
  output logic [AW-1:0]   rom_addr,
  input  logic [M*S-1:0]  rom_data,
  // G tile buffer write port
  output logic            buf_wr_en,
  output logic [KW-1:0]   buf_wr_row,
  output logic [M*S-1:0]  buf_wr_data
);

  logic [KW:0]   k;          // next ROM row to read
  logic [KW:0]   dg;
  logic [AW-1:0] base;
  logic          rd_pend;    // ROM data for row k-1 arrives this cycle
  logic [KW-1:0] rd_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      k       <= '0;
      dg      <= '0;
      base    <= '0;
      rd_pend <= 1'b0;
      rd_row  <= '0;
    end else begin
      done    <= 1'b0;
      rd_pend <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        k    <= '0;
        dg   <= (KW+1)'(bg_degree(row));
        base <= AW'(bg_offset(row));
      end else if (busy) begin
        if (k < dg) begin
          rd_pend <= 1'b1;
          rd_row  <= k[KW-1:0];
          k       <= k + 1'b1;
        end else if (!rd_pend) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign rom_addr    = base + AW'(k);
  assign buf_wr_en   = rd_pend;
  assign buf_wr_row  = rd_row;
  assign buf_wr_data = rom_data;

endmodule
