// out_port_share -- one HBM write port shared by several BATS CUs.
//
// Each CU offers its output-buffer beats (beta = 64 elements, one 512-bit
// beat each) on a valid/ready stream.  The port takes one beat from each CU
// in turn (round robin over the CUs that have a beat ready), so a CU with a
// full output bank gets the port every NIN-th beat at worst and the port
// runs at one beat per clock while any CU has data.  The CUs that are idle
// are skipped instead of being waited for.  The output is registered
// (one cycle latency); ev_contend pulses when more than one CU was waiting
// in a cycle in which the port took a beat.
module out_port_share
  import bats_pkg::*;
#(
  parameter int unsigned NIN = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid [NIN],
  output logic     in_ready [NIN],
  input  wr_req_t  in_req   [NIN],
  output logic     out_valid,
  input  logic     out_ready,
  output wr_req_t  out_req,
  output logic     ev_contend
);

  localparam int unsigned IW = (NIN > 1) ? $clog2(NIN) : 1;

  logic [IW-1:0] last;       // CU served last
  logic [IW-1:0] grant;
  logic          any;
  logic [NIN-1:0] vvec;      // request vector
  logic          load;

  // round robin: first valid CU after `last`
  always_comb begin
    any    = 1'b0;
    grant  = last;
    for (int unsigned d = 1; d <= NIN; d++) begin
      logic [31:0] c;
      c = (32'(last) + d) % NIN;
      if (in_valid[c] && !any) begin
        any   = 1'b1;
        grant = IW'(c);
      end
    end
    for (int unsigned c = 0; c < NIN; c++)
      vvec[c] = in_valid[c];
  end

  assign load = !out_valid || out_ready;

  always_comb begin
    for (int c = 0; c < NIN; c++)
      in_ready[c] = load && any && (grant == IW'(c));
  end

  assign ev_contend = load && ((vvec & (vvec - 1'b1)) != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_req   <= '0;
      last      <= IW'(NIN - 1);
    end else if (load) begin
      out_valid <= any;
      if (any) begin
        out_req <= in_req[grant];
        last    <= grant;
      end
    end
  end

endmodule
