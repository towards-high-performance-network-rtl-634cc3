// bats_cu -- BATS compute unit: builds whole batches X_i = B_i * G_i.
//
// One CU takes a batch command (batch id i, base-graph row i mod m, shift
// floor(i/m)) and produces the PK x M coded batch with no help from other
// CUs, so CUs can be replicated for batch-level parallelism.  Inside:
//   gen_matrix_rom -> gmat_mover -> g_tile_buffer  (G, from the top)
//   HBM read port  -> data_mover -> b_tile_buffer  (B, from the left)
//   systolic_array (TM x TN ff_pe) -> transpose buffer in the data mover
//   -> HBM write stream
// sequenced by cu_controller.  Loading of the next B super-tile overlaps
// the computation on the current one (ping-pong B buffer), and write-back of
// one output bank overlaps the filling of the other (ping-pong output
// buffer).  Memory ports are single-beat valid/ready channels, 512 bits wide.
// The block structure follows the paper's CU diagram; the port protocol and
// the exact sequencing are this design's.
module bats_cu
  import bats_pkg::*;
#(
  parameter int unsigned PK = PKT_LEN,
  parameter int unsigned K  = NUM_PKT,
  parameter int unsigned TM = T_M,
  parameter int unsigned TN = T_N,
  parameter int unsigned TK = T_K,
  parameter int unsigned M  = BATCH_M,
  parameter int unsigned N  = ELEM_W,
  parameter int unsigned S  = BV_S
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  batch_cmd_t  cmd,
  input  addr_t       in_base,
  input  addr_t       out_base,
  // HBM read port
  output logic        rd_req_valid,
  input  logic        rd_req_ready,
  output addr_t       rd_req_addr,
  input  logic        rd_rsp_valid,
  output logic        rd_rsp_ready,
  input  beat_t       rd_rsp_data,
  // HBM write stream
  output logic        wr_valid,
  input  logic        wr_ready,
  output wr_req_t     wr_req,
  // status
  output logic        idle,
  output logic        ev_in_stall,
  output logic        ev_out_stall
);

  localparam int unsigned R     = BEAT_BYTES;
  localparam int unsigned NT    = M / TN;
  localparam int unsigned KW    = $clog2(TK);
  localparam int unsigned SUBS  = R / TM;
  localparam int unsigned SW    = (SUBS > 1) ? $clog2(SUBS) : 1;
  localparam int unsigned NW    = (NT > 1) ? $clog2(NT) : 1;
  localparam int unsigned DEPTH = BG_EDGES;
  localparam int unsigned AW    = $clog2(DEPTH);

  // controller <-> movers / buffers
  logic          mv_start;
  batch_cmd_t    mv_cmd;
  logic          g_busy, g_done;
  logic [AW-1:0] rom_addr;
  logic [M*S-1:0] rom_data;
  logic          gw_en;
  logic [KW-1:0] gw_row;
  logic [M*S-1:0] gw_data;
  logic [NW-1:0] g_rd_tile;
  logic [KW-1:0] g_rd_row;
  logic [S-1:0]  g_row [TN];

  logic          bw_en, bw_bank, b_fill_done, b_fill_bank;
  logic [KW-1:0] bw_col;
  logic [R*N-1:0] bw_data;
  logic [1:0]    b_full;
  logic          b_rd_bank, b_release, b_release_bank;
  logic [KW-1:0] b_rd_col;
  logic [SW-1:0] b_rd_sub;
  logic [N-1:0]  b_col [TM];

  pe_ctl_t       ctl;
  logic [N-1:0]  res       [TM][TN];
  logic          res_valid [TM][TN];
  logic [3:0]    res_tag   [TM][TN];

  logic          alloc, alloc_ready, alloc_bank;
  addr_t         alloc_addr;
  logic          rd_busy, wr_idle, ctl_busy;

  gen_matrix_rom #(.M(M), .S(S)) u_rom (.clk, .addr(rom_addr), .data(rom_data));

  gmat_mover #(.M(M), .S(S), .TK(TK)) u_gmv (
    .clk, .rst_n, .start(mv_start), .row(mv_cmd.row), .busy(g_busy), .done(g_done),
    .rom_addr, .rom_data,
    .buf_wr_en(gw_en), .buf_wr_row(gw_row), .buf_wr_data(gw_data)
  );

  g_tile_buffer #(.TK(TK), .TN(TN), .M(M), .S(S)) u_gbuf (
    .clk, .wr_en(gw_en), .wr_row(gw_row), .wr_data(gw_data),
    .rd_tile(g_rd_tile), .rd_row(g_rd_row), .g_row
  );

  data_mover #(.PK(PK), .K(K), .TM(TM), .TN(TN), .TK(TK), .M(M), .N(N), .R(R)) u_dm (
    .clk, .rst_n, .start(mv_start), .cmd(mv_cmd), .in_base, .rd_busy,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_ready, .rd_rsp_data,
    .bw_en, .bw_bank, .bw_col, .bw_data, .b_fill_done, .b_fill_bank, .b_full,
    .alloc, .alloc_addr, .alloc_ready, .alloc_bank,
    .res, .res_valid, .res_tag,
    .wr_valid, .wr_ready, .wr_req, .wr_idle
  );

  b_tile_buffer #(.TM(TM), .TK(TK), .R(R), .N(N)) u_bbuf (
    .clk, .rst_n,
    .wr_en(bw_en), .wr_bank(bw_bank), .wr_col(bw_col), .wr_data(bw_data),
    .fill_done(b_fill_done), .fill_bank(b_fill_bank),
    .rd_bank(b_rd_bank), .rd_col(b_rd_col), .rd_sub(b_rd_sub), .b_col,
    .release_en(b_release), .release_bank(b_release_bank), .full(b_full)
  );

  cu_controller #(.PK(PK), .TM(TM), .TN(TN), .TK(TK), .M(M), .N(N), .R(R)) u_ctl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .out_base,
    .mv_start, .mv_cmd, .g_done,
    .b_full, .b_rd_bank, .b_rd_col, .b_rd_sub, .b_release, .b_release_bank,
    .g_rd_tile, .g_rd_row, .ctl,
    .alloc, .alloc_addr, .alloc_ready, .alloc_bank,
    .ev_in_stall, .ev_out_stall, .busy(ctl_busy)
  );

  systolic_array #(.TM(TM), .TN(TN), .N(N), .S(S)) u_sa (
    .clk, .rst_n, .b_col, .g_row, .ctl, .res, .res_valid, .res_tag
  );

  assign idle = !ctl_busy && !rd_busy && wr_idle;

endmodule
