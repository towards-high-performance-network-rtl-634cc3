// bats_accel -- CS-BATS network-coding encoder accelerator (top level).
//
// The host places the K input packets (PK bytes each, packet p at
// in_base + p*PK) in HBM, one copy per read port, and starts a job of
// num_batches batches.  The load-balance scheduler hands batch i (row i mod
// m of the base graph, shifted floor(i/m) times) to one of NCU BATS CUs;
// each CU reads the selected packets through its read adapter, multiplies
// them by the batch's bounded-value generator matrix and writes the PK x M
// coded batch back through a write port shared with other CUs.
//
// Configuration (defaults = the baseline implementation): NCU = 8 CUs,
// NAXI = 8 read adapters (NCU/NAXI CUs per adapter, one HBM pseudo channel
// per adapter), NOUT = 1 shared write port (NCU/NOUT CUs per port).
// Output layout: the batch-i tile (rows 8t..8t+7 of all M coded packets) is
// the 128-byte block at out_base + (i*PK/8 + t)*128, coded packet m's eight
// elements at byte offset 8m of it.
//
// Interface: start (pulse), num_batches, lbs_en (1 = load-balanced order),
// in_base, out_base; busy and a one-cycle done pulse; NAXI read ports and
// NOUT write ports (single-beat valid/ready, 512 bits, byte addresses); and
// event counters cleared at start: input stalls, output-buffer stalls,
// reversed dispatches, and cycles in which CUs contended for a write port
// or a read adapter.  The HBM itself, its crossbars and the host are outside.
module bats_accel
  import bats_pkg::*;
#(
  parameter int unsigned NCU  = 8,
  parameter int unsigned NAXI = 8,
  parameter int unsigned NOUT = 1,
  parameter int unsigned PK   = PKT_LEN,
  parameter int unsigned K    = NUM_PKT
) (
  input  logic        clk,
  input  logic        rst_n,
  // host control
  input  logic        start,
  input  logic [15:0] num_batches,
  input  logic        lbs_en,
  input  addr_t       in_base,
  input  addr_t       out_base,
  output logic        busy,
  output logic        done,
  // HBM read ports (one per read adapter / pseudo channel)
  output logic        rd_req_valid [NAXI],
  input  logic        rd_req_ready [NAXI],
  output addr_t       rd_req_addr  [NAXI],
  input  logic        rd_rsp_valid [NAXI],
  output logic        rd_rsp_ready [NAXI],
  input  beat_t       rd_rsp_data  [NAXI],
  // HBM write ports
  output logic        wr_valid [NOUT],
  input  logic        wr_ready [NOUT],
  output wr_req_t     wr_req   [NOUT],
  // event counters
  output logic [31:0] cnt_in_stall,
  output logic [31:0] cnt_out_stall,
  output logic [31:0] cnt_reverse,
  output logic [31:0] cnt_wr_contend,
  output logic [31:0] cnt_rd_contend
);

  localparam int unsigned CPA = NCU / NAXI;   // CUs per read adapter
  localparam int unsigned CPO = NCU / NOUT;   // CUs per write port

  // scheduler
  logic           dispatching, ev_reverse;
  logic [NCU-1:0] cmd_valid, cmd_ready;
  batch_cmd_t     cmd;

  load_balance_scheduler #(.NCU(NCU)) u_sched (
    .clk, .rst_n, .start(start && !busy), .num_batches, .lbs_en,
    .dispatching, .cmd_valid, .cmd_ready, .cmd, .ev_reverse
  );

  // CUs
  logic    cu_rd_req_valid [NCU];
  logic    cu_rd_req_ready [NCU];
  addr_t   cu_rd_req_addr  [NCU];
  logic    cu_rd_rsp_valid [NCU];
  logic    cu_rd_rsp_ready [NCU];
  beat_t   cu_rd_rsp_data  [NCU];
  logic    cu_wr_valid     [NCU];
  logic    cu_wr_ready     [NCU];
  wr_req_t cu_wr_req       [NCU];
  logic [NCU-1:0] cu_idle, cu_in_stall, cu_out_stall;

  for (genvar c = 0; c < NCU; c++) begin : g_cu
    bats_cu #(.PK(PK), .K(K)) u_cu (
      .clk, .rst_n,
      .cmd_valid(cmd_valid[c]), .cmd_ready(cmd_ready[c]), .cmd,
      .in_base, .out_base,
      .rd_req_valid(cu_rd_req_valid[c]), .rd_req_ready(cu_rd_req_ready[c]),
      .rd_req_addr(cu_rd_req_addr[c]),
      .rd_rsp_valid(cu_rd_rsp_valid[c]), .rd_rsp_ready(cu_rd_rsp_ready[c]),
      .rd_rsp_data(cu_rd_rsp_data[c]),
      .wr_valid(cu_wr_valid[c]), .wr_ready(cu_wr_ready[c]), .wr_req(cu_wr_req[c]),
      .idle(cu_idle[c]), .ev_in_stall(cu_in_stall[c]), .ev_out_stall(cu_out_stall[c])
    );
  end

  // read adapters
  logic [NAXI-1:0] rd_contend;
  for (genvar a = 0; a < NAXI; a++) begin : g_axi
    logic  i_req_valid [CPA];
    logic  i_req_ready [CPA];
    addr_t i_req_addr  [CPA];
    logic  i_rsp_valid [CPA];
    logic  i_rsp_ready [CPA];
    beat_t i_rsp_data  [CPA];
    for (genvar c = 0; c < CPA; c++) begin : g_map
      assign i_req_valid[c] = cu_rd_req_valid[a*CPA + c];
      assign i_req_addr[c]  = cu_rd_req_addr[a*CPA + c];
      assign i_rsp_ready[c] = cu_rd_rsp_ready[a*CPA + c];
      assign cu_rd_req_ready[a*CPA + c] = i_req_ready[c];
      assign cu_rd_rsp_valid[a*CPA + c] = i_rsp_valid[c];
      assign cu_rd_rsp_data[a*CPA + c]  = i_rsp_data[c];
    end
    axi_rd_adapter #(.NIN(CPA)) u_rda (
      .clk, .rst_n,
      .in_req_valid(i_req_valid), .in_req_ready(i_req_ready), .in_req_addr(i_req_addr),
      .in_rsp_valid(i_rsp_valid), .in_rsp_ready(i_rsp_ready), .in_rsp_data(i_rsp_data),
      .mem_req_valid(rd_req_valid[a]), .mem_req_ready(rd_req_ready[a]),
      .mem_req_addr(rd_req_addr[a]),
      .mem_rsp_valid(rd_rsp_valid[a]), .mem_rsp_ready(rd_rsp_ready[a]),
      .mem_rsp_data(rd_rsp_data[a]),
      .ev_contend(rd_contend[a])
    );
  end

  // shared write ports
  logic [NOUT-1:0] wr_contend;
  for (genvar o = 0; o < NOUT; o++) begin : g_out
    logic    i_valid [CPO];
    logic    i_ready [CPO];
    wr_req_t i_req   [CPO];
    for (genvar c = 0; c < CPO; c++) begin : g_map
      assign i_valid[c] = cu_wr_valid[o*CPO + c];
      assign i_req[c]   = cu_wr_req[o*CPO + c];
      assign cu_wr_ready[o*CPO + c] = i_ready[c];
    end
    out_port_share #(.NIN(CPO)) u_ops (
      .clk, .rst_n,
      .in_valid(i_valid), .in_ready(i_ready), .in_req(i_req),
      .out_valid(wr_valid[o]), .out_ready(wr_ready[o]), .out_req(wr_req[o]),
      .ev_contend(wr_contend[o])
    );
  end

  // number of set bits (event counters)
  function automatic logic [31:0] popcount(input logic [NCU-1:0] v);
    logic [31:0] n = '0;
    for (int i = 0; i < NCU; i++) n += 32'(v[i]);
    return n;
  endfunction

  // job state and counters
  logic all_quiet;
  always_comb begin
    all_quiet = !dispatching && (&cu_idle);
    for (int o = 0; o < NOUT; o++) all_quiet &= !wr_valid[o];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy           <= 1'b0;
      done           <= 1'b0;
      cnt_in_stall   <= '0;
      cnt_out_stall  <= '0;
      cnt_reverse    <= '0;
      cnt_wr_contend <= '0;
      cnt_rd_contend <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && num_batches != 0) begin
          busy           <= 1'b1;
          cnt_in_stall   <= '0;
          cnt_out_stall  <= '0;
          cnt_reverse    <= '0;
          cnt_wr_contend <= '0;
          cnt_rd_contend <= '0;
        end
      end else begin
        cnt_in_stall   <= cnt_in_stall   + popcount(cu_in_stall);
        cnt_out_stall  <= cnt_out_stall  + popcount(cu_out_stall);
        cnt_reverse    <= cnt_reverse    + 32'(ev_reverse);
        cnt_wr_contend <= cnt_wr_contend + popcount(NCU'(wr_contend));
        cnt_rd_contend <= cnt_rd_contend + popcount(NCU'(rd_contend));
        if (all_quiet && !dispatching && !start) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
