// hbm_wr_sink -- behavioural model of an HBM write port (not
// synthesizable).  Accepts single-beat writes with ready asserted at random
// READY_PCT percent of the cycles, and stores the bytes in a sparse memory
// that the testbench reads with byte_at().
module hbm_wr_sink
  import bats_pkg::*;
#(
  parameter int unsigned READY_PCT = 100
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    wr_valid,
  output logic    wr_ready,
  input  wr_req_t wr_req
);
  logic [7:0] mem [longint];
  int unsigned nbeats = 0;
  int unsigned rewrites = 0;

  function automatic logic [7:0] byte_at(input longint a);
    return mem.exists(a) ? mem[a] : 8'hxx;
  endfunction
  function automatic bit written(input longint a);
    return mem.exists(a);
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) wr_ready <= 1'b0;
    else begin
      if (wr_valid && wr_ready) begin
        if (mem.exists(longint'(wr_req.addr))) rewrites++;
        for (int i = 0; i < BEAT_BYTES; i++) mem[longint'(wr_req.addr) + i] = wr_req.data[i*8 +: 8];
        nbeats++;
      end
      wr_ready <= ($urandom_range(99) < READY_PCT);
    end
  end
endmodule
