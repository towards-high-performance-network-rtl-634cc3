// axi_rd_adapter -- read adapter between BATS CU input ports and one HBM
// pseudo channel.
//
// In the main configuration every CU has an adapter of its own (NIN = 1).
// Several CUs can be bundled on one adapter (NIN > 1) to save logic, at the
// price of contention: requests are then granted round robin, one per clock,
// and the requester of each granted read is queued (up to DEPTH reads in
// flight) so that the in-order read data can be routed back to it.  With
// NIN = 1 the queue only limits the reads in flight.
// Interface: per-CU request (valid/ready/addr) and response (valid/ready/
// data) channels, and the same pair towards the memory.  Requests pass
// through combinationally; ev_contend pulses when two or more CUs request
// in the same cycle.
module axi_rd_adapter
  import bats_pkg::*;
#(
  parameter int unsigned NIN   = 1,
  parameter int unsigned DEPTH = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  // CU side
  input  logic   in_req_valid [NIN],
  output logic   in_req_ready [NIN],
  input  addr_t  in_req_addr  [NIN],
  output logic   in_rsp_valid [NIN],
  input  logic   in_rsp_ready [NIN],
  output beat_t  in_rsp_data  [NIN],
  // memory side
  output logic   mem_req_valid,
  input  logic   mem_req_ready,
  output addr_t  mem_req_addr,
  input  logic   mem_rsp_valid,
  output logic   mem_rsp_ready,
  input  beat_t  mem_rsp_data,
  output logic   ev_contend
);

  localparam int unsigned IW = (NIN > 1) ? $clog2(NIN) : 1;
  localparam int unsigned PW = $clog2(DEPTH);

  logic [IW-1:0] last, grant;
  logic          any;
  logic [NIN-1:0] vvec;      // request vector

  always_comb begin
    any    = 1'b0;
    grant  = last;
    for (int unsigned d = 1; d <= NIN; d++) begin
      logic [31:0] c;
      c = (32'(last) + d) % NIN;
      if (in_req_valid[c] && !any) begin
        any   = 1'b1;
        grant = IW'(c);
      end
    end
    for (int unsigned c = 0; c < NIN; c++)
      vvec[c] = in_req_valid[c];
  end

  // requester queue
  logic [IW-1:0] q [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   cnt;
  logic          qfull, push, pop;
  logic [IW-1:0] head;

  assign qfull = (cnt == (PW+1)'(DEPTH));
  assign head  = q[rp];

  assign mem_req_valid = any && !qfull;
  assign mem_req_addr  = in_req_addr[grant];
  assign push          = mem_req_valid && mem_req_ready;

  always_comb begin
    for (int c = 0; c < NIN; c++) begin
      in_req_ready[c] = !qfull && mem_req_ready && (grant == IW'(c));
      in_rsp_valid[c] = mem_rsp_valid && (cnt != 0) && (head == IW'(c));
      in_rsp_data[c]  = mem_rsp_data;
    end
  end

  assign mem_rsp_ready = (cnt != 0) && in_rsp_ready[head];
  assign pop           = mem_rsp_valid && mem_rsp_ready;
  assign ev_contend    = (vvec & (vvec - 1'b1)) != '0;

  always_ff @(posedge clk) begin
    if (push) q[wp] <= grant;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp   <= '0;
      rp   <= '0;
      cnt  <= '0;
      last <= IW'(NIN - 1);
    end else begin
      if (push) begin
        wp   <= wp + 1'b1;
        last <= grant;
      end
      if (pop) rp <= rp + 1'b1;
      case ({push, pop})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: cnt <= cnt;
      endcase
    end
  end

  // read data never arrives for a read that was not issued
  a_rsp_issued: assert property (@(posedge clk) disable iff (!rst_n)
                                 mem_rsp_valid |-> cnt != 0);

endmodule
