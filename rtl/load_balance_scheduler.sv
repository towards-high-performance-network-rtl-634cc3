// load_balance_scheduler -- hands the batches of a job to the BATS CUs.
//
// Batch i (0-based) is built from base-graph row i mod m, cyclically shifted
// floor(i/m) times.  Batches are dispatched in order, in rounds of NCU: the
// p-th batch of a round (p = i mod NCU) goes to CU p, except in odd layers
// (layer = floor(i/m)) where the CU order is reversed and it goes to CU
// NCU-1-p.  A CU that built a light row in one layer thus builds a heavy row
// in the next, which evens out the CUs' run times when the row degrees grow
// along the base graph.  With lbs_en = 0 the order is never reversed
// (sequential scheduling, for comparison).
//
// Interface: start pulses with num_batches; one batch_cmd_t per CU with a
// valid/ready handshake (a dispatch waits for its CU); `dispatching` is high
// until the last batch has been handed out; ev_reverse pulses for each batch
// dispatched in reversed order.  One batch is handed out per clock at most.
module load_balance_scheduler
  import bats_pkg::*;
#(
  parameter int unsigned NCU  = 8,
  parameter int unsigned ROWS = BG_ROWS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] num_batches,
  input  logic        lbs_en,
  output logic        dispatching,
  output logic [NCU-1:0] cmd_valid,
  input  logic [NCU-1:0] cmd_ready,
  output batch_cmd_t  cmd,
  output logic        ev_reverse
);

  localparam int unsigned CW = (NCU > 1) ? $clog2(NCU) : 1;

  logic [15:0]   bid;        // next batch id
  logic [15:0]   total;
  logic [7:0]    row;        // bid mod ROWS
  logic [15:0]   layer;      // bid / ROWS
  logic [CW-1:0] pos;        // bid mod NCU
  logic [CW-1:0] cu;
  logic          rev;

  assign rev = lbs_en && layer[0];
  assign cu  = rev ? CW'(NCU - 1 - int'(pos)) : pos;

  assign cmd.batch_id = bid;
  assign cmd.row      = row;
  assign cmd.shift    = layer;

  always_comb begin
    cmd_valid = '0;
    if (dispatching) cmd_valid[cu] = 1'b1;
  end

  logic fire;
  assign fire       = dispatching && cmd_ready[cu];
  assign ev_reverse = fire && rev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dispatching <= 1'b0;
      bid   <= '0;
      total <= '0;
      row   <= '0;
      layer <= '0;
      pos   <= '0;
    end else if (!dispatching) begin
      if (start && num_batches != 0) begin
        dispatching <= 1'b1;
        total <= num_batches;
        bid   <= '0;
        row   <= '0;
        layer <= '0;
        pos   <= '0;
      end
    end else if (fire) begin
      bid <= bid + 1'b1;
      if (int'(row) == ROWS - 1) begin
        row   <= '0;
        layer <= layer + 1'b1;
      end else begin
        row <= row + 1'b1;
      end
      pos <= (int'(pos) == NCU - 1) ? '0 : pos + 1'b1;
      if (bid + 1'b1 == total) dispatching <= 1'b0;
    end
  end

endmodule
