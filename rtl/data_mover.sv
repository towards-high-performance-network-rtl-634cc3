// data_mover -- moves B tiles from HBM into the CU and X tiles back.
//
// Read side (decoupled loading, one batch at a time): for a batch of base
// row r shifted by `shift`, column k of B is packet
//   p_k = (bg_col(r, k) + shift) mod K        (right cyclic shift of the row)
// stored at in_base + p_k*PK.  B is read in super-tiles of R = TM+alpha rows:
// for super-tile J and k = 0..dg-1 the mover reads the R contiguous elements
// at in_base + p_k*PK + J*R with one BEAT_W-bit read, and stores them as
// column k of B-buffer bank J mod 2.  A bank is only requested when it is
// not full and the responses of the previous use of the bank are complete;
// after the dg-th response the bank is marked full for the controller.
// Requests are issued back to back (one per cycle) and responses, which
// return in order with any latency, are always accepted, so memory latency
// is overlapped with the computation on the other bank.
//
// Write side: the ping-pong transpose buffer (see transpose_buffer) sits in
// the data mover; its beats leave on wr_valid/wr_ready/wr_req.
// Requests are single-beat; a full AXI4 burst interface is left out.
module data_mover
  import bats_pkg::*;
#(
  parameter int unsigned PK = PKT_LEN,
  parameter int unsigned K  = NUM_PKT,
  parameter int unsigned TM = T_M,
  parameter int unsigned TN = T_N,
  parameter int unsigned TK = T_K,
  parameter int unsigned M  = BATCH_M,
  parameter int unsigned N  = ELEM_W,
  parameter int unsigned R  = BEAT_BYTES,
  localparam int unsigned NJ = PK / R,
  localparam int unsigned KW = $clog2(TK)
) (
  input  logic          clk,
  input  logic          rst_n,
  // batch start (from the CU controller)
  input  logic          start,
  input  batch_cmd_t    cmd,
  input  addr_t         in_base,
  output logic          rd_busy,
  // HBM read port
  output logic          rd_req_valid,
  input  logic          rd_req_ready,
  output addr_t         rd_req_addr,
  input  logic          rd_rsp_valid,
  output logic          rd_rsp_ready,
  input  beat_t         rd_rsp_data,
  // B tile buffer write side
  output logic          bw_en,
  output logic          bw_bank,
  output logic [KW-1:0] bw_col,
  output logic [R*N-1:0] bw_data,
  output logic          b_fill_done,
  output logic          b_fill_bank,
  input  logic [1:0]    b_full,
  // transpose buffer: allocation and array results
  input  logic          alloc,
  input  addr_t         alloc_addr,
  output logic          alloc_ready,
  output logic          alloc_bank,
  input  logic [N-1:0]  res       [TM][TN],
  input  logic          res_valid [TM][TN],
  input  logic [3:0]    res_tag   [TM][TN],
  // HBM write stream
  output logic          wr_valid,
  input  logic          wr_ready,
  output wr_req_t       wr_req,
  output logic          wr_idle
);

  localparam int unsigned JW = $clog2(NJ + 1);

  logic [7:0]    row;
  logic [15:0]   shift;
  logic [KW:0]   dg;
  logic [JW-1:0] req_j, rsp_j;
  logic [KW:0]   req_k, rsp_k;
  logic          active;

  logic [31:0] pkt;           // packet index of the next request
  always_comb begin
    pkt = (bg_col(32'(row), 32'(req_k), K) + 32'(shift)) % K;
  end

  assign rd_req_valid = active && (req_j < JW'(NJ)) && !b_full[req_j[0]]
                        && (req_j <= rsp_j + 1'b1);
  assign rd_req_addr  = in_base + addr_t'(pkt * PK) + addr_t'(int'(req_j) * R);
  assign rd_rsp_ready = 1'b1;

  assign bw_en       = active && rd_rsp_valid;
  assign bw_bank     = rsp_j[0];
  assign bw_col      = rsp_k[KW-1:0];
  assign bw_data     = rd_rsp_data[R*N-1:0];
  assign b_fill_done = bw_en && (rsp_k == dg - 1'b1);
  assign b_fill_bank = rsp_j[0];
  assign rd_busy     = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      row    <= '0;
      shift  <= '0;
      dg     <= '0;
      req_j  <= '0;
      req_k  <= '0;
      rsp_j  <= '0;
      rsp_k  <= '0;
    end else if (!active) begin
      if (start) begin
        active <= 1'b1;
        row    <= cmd.row;
        shift  <= cmd.shift;
        dg     <= (KW+1)'(bg_degree(cmd.row));
        req_j  <= '0;
        req_k  <= '0;
        rsp_j  <= '0;
        rsp_k  <= '0;
      end
    end else begin
      if (rd_req_valid && rd_req_ready) begin
        if (req_k == dg - 1'b1) begin
          req_k <= '0;
          req_j <= req_j + 1'b1;
        end else begin
          req_k <= req_k + 1'b1;
        end
      end
      if (bw_en) begin
        if (b_fill_done) begin
          rsp_k <= '0;
          rsp_j <= rsp_j + 1'b1;
          if (rsp_j == JW'(NJ - 1)) active <= 1'b0;
        end else begin
          rsp_k <= rsp_k + 1'b1;
        end
      end
    end
  end

  transpose_buffer #(.TM(TM), .TN(TN), .M(M), .N(N)) u_tbuf (
    .clk, .rst_n,
    .alloc, .alloc_addr, .alloc_ready, .alloc_bank,
    .res, .res_valid, .res_tag,
    .out_valid(wr_valid), .out_ready(wr_ready), .out_req(wr_req),
    .idle(wr_idle)
  );

endmodule
