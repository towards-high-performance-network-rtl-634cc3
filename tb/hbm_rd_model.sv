// hbm_rd_model -- behavioural model of one HBM pseudo-channel read port
// (not synthesizable).  Accepts single-beat read requests (ready is
// throttled at random to READY_PCT percent), returns each beat LATENCY
// cycles later, in order, holding rsp_valid until rsp_ready.  The content is
// generated: byte at address a is tb_ref_pkg::mem_byte(a).
module hbm_rd_model
  import bats_pkg::*;
#(
  parameter int unsigned LATENCY   = 90,
  parameter int unsigned READY_PCT = 100
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_valid,
  output logic  req_ready,
  input  addr_t req_addr,
  output logic  rsp_valid,
  input  logic  rsp_ready,
  output beat_t rsp_data
);

  typedef struct { longint unsigned addr; longint unsigned due; } pend_t;
  pend_t q[$];
  longint unsigned cyc;
  int unsigned nreq;

  function automatic beat_t beat_at(input longint unsigned a);
    beat_t b;
    for (int i = 0; i < BEAT_BYTES; i++) b[i*8 +: 8] = tb_ref_pkg::mem_byte(a + i);
    return b;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q.delete();
      cyc       <= 0;
      nreq      <= 0;
      req_ready <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
    end else begin
      cyc <= cyc + 1;
      if (req_valid && req_ready) begin
        q.push_back('{addr: longint'(req_addr), due: cyc + LATENCY});
        nreq <= nreq + 1;
      end
      req_ready <= ($urandom_range(99) < READY_PCT);
      if (rsp_valid && rsp_ready) begin
        void'(q.pop_front());
        rsp_valid <= 1'b0;
        if (q.size() > 0 && q[0].due <= cyc) begin
          rsp_valid <= 1'b1;
          rsp_data  <= beat_at(q[0].addr);
        end
      end else if (!rsp_valid && q.size() > 0 && q[0].due <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_data  <= beat_at(q[0].addr);
      end
    end
  end

endmodule
