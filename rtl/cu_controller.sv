// cu_controller -- control and scheduling unit of one BATS CU.
//
// Accepts one batch command at a time from the load-balance scheduler
// (cmd_valid/cmd_ready) and then:
//   1. starts the generator-matrix mover and the data mover together;
//   2. waits until G is in its tile buffer;
//   3. for every super-tile J (R = TM+alpha rows of B, bank J mod 2),
//        waits until the data mover has filled the bank (input stall),
//        for every row tile js in the super-tile
//          allocates an output bank (waits while both are busy: output
//          stall, the ping-pong rule of the output buffer),
//          for every column tile n = 0..M/TN-1 and k = 0..dg-1
//            issues B[js rows][k] and G[k][n cols] to the systolic array,
//            one k per clock, `first`/`last` marking the tile ends;
//        releases the B bank to the data mover;
//   4. returns to idle, ready for the next batch.
// A batch of degree dg thus takes (PK/TM)*(M/TN)*dg issue cycles when
// nothing stalls (e.g. 32*2*11 = 704 for dg = 11 at the default sizes).
// Output tile (J, js) of batch b is written at
// out_base + (b*PK/TM + J*R/TM + js) * TM*M*N/8.  The loop order and the
// output layout are this design's choices.
module cu_controller
  import bats_pkg::*;
#(
  parameter int unsigned PK = PKT_LEN,
  parameter int unsigned TM = T_M,
  parameter int unsigned TN = T_N,
  parameter int unsigned TK = T_K,
  parameter int unsigned M  = BATCH_M,
  parameter int unsigned N  = ELEM_W,
  parameter int unsigned R  = BEAT_BYTES,
  localparam int unsigned NJ   = PK / R,
  localparam int unsigned SUBS = R / TM,
  localparam int unsigned NT   = M / TN,
  localparam int unsigned KW   = $clog2(TK),
  localparam int unsigned SW   = (SUBS > 1) ? $clog2(SUBS) : 1,
  localparam int unsigned NW   = (NT > 1) ? $clog2(NT) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // batch command
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  batch_cmd_t    cmd,
  input  addr_t         out_base,
  // mover starts
  output logic          mv_start,
  output batch_cmd_t    mv_cmd,
  input  logic          g_done,
  // B tile buffer
  input  logic [1:0]    b_full,
  output logic          b_rd_bank,
  output logic [KW-1:0] b_rd_col,
  output logic [SW-1:0] b_rd_sub,
  output logic          b_release,
  output logic          b_release_bank,
  // G tile buffer
  output logic [NW-1:0] g_rd_tile,
  output logic [KW-1:0] g_rd_row,
  // systolic array control word
  output pe_ctl_t       ctl,
  // output buffer allocation
  output logic          alloc,
  output addr_t         alloc_addr,
  input  logic          alloc_ready,
  input  logic          alloc_bank,
  // events
  output logic          ev_in_stall,
  output logic          ev_out_stall,
  output logic          busy
);

  typedef enum logic [1:0] {IDLE, LOADG, RUN} state_e;
  state_e state;

  batch_cmd_t    cur;
  logic [KW:0]   dg;
  logic [15:0]   j;          // super-tile
  logic [SW-1:0] js;         // row tile inside the super-tile
  logic [NW-1:0] n;          // column tile
  logic [KW:0]   k;
  logic          obank;      // output bank of the current row tile

  logic grp_start, can_issue, last_k, last_n, last_js, last_j;
  assign grp_start = (state == RUN) && (n == '0) && (k == '0);
  assign can_issue = (state == RUN) && (!grp_start || (b_full[j[0]] && alloc_ready));
  assign last_k    = (k == dg - 1'b1);
  assign last_n    = (int'(n) == NT - 1);
  assign last_js   = (int'(js) == SUBS - 1);
  assign last_j    = (int'(j) == NJ - 1);

  assign cmd_ready = (state == IDLE);
  assign mv_start  = cmd_valid && cmd_ready;
  assign mv_cmd    = cmd;

  assign b_rd_bank = j[0];
  assign b_rd_col  = k[KW-1:0];
  assign b_rd_sub  = js;
  assign g_rd_tile = n;
  assign g_rd_row  = k[KW-1:0];

  assign alloc      = grp_start && can_issue;
  localparam int unsigned TILES_PER_BATCH = PK / TM;
  localparam int unsigned BANK_BYTES      = TM * M * N / 8;
  assign alloc_addr = out_base + addr_t'((32'(cur.batch_id) * TILES_PER_BATCH
                      + 32'(j) * SUBS + 32'(js)) * BANK_BYTES);

  always_comb begin
    ctl       = '0;
    ctl.valid = can_issue;
    ctl.first = (k == '0);
    ctl.last  = last_k;
    ctl.tag   = {grp_start ? alloc_bank : obank, 3'(n)};
  end

  assign b_release      = can_issue && last_k && last_n && last_js;
  assign b_release_bank = j[0];
  assign ev_in_stall    = grp_start && !b_full[j[0]];
  assign ev_out_stall   = grp_start && b_full[j[0]] && !alloc_ready;
  assign busy           = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      cur   <= '0;
      dg    <= '0;
      j     <= '0;
      js    <= '0;
      n     <= '0;
      k     <= '0;
      obank <= 1'b0;
    end else begin
      case (state)
        IDLE: if (mv_start) begin
          cur   <= cmd;
          dg    <= (KW+1)'(bg_degree(cmd.row));
          j     <= '0;
          js    <= '0;
          n     <= '0;
          k     <= '0;
          state <= LOADG;
        end
        LOADG: if (g_done) state <= RUN;
        RUN: if (can_issue) begin
          if (grp_start) obank <= alloc_bank;
          if (!last_k) begin
            k <= k + 1'b1;
          end else begin
            k <= '0;
            if (!last_n) begin
              n <= n + 1'b1;
            end else begin
              n <= '0;
              if (!last_js) begin
                js <= js + 1'b1;
              end else begin
                js <= '0;
                if (!last_j) j <= j + 1'b1;
                else         state <= IDLE;
              end
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
