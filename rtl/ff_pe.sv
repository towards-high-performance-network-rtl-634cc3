// ff_pe -- finite-field multiply-accumulate processing element of the
// systolic array.
//
// Each valid cycle the PE multiplies the B element arriving from the left
// (a_in, a full GF(2^N) element) by the generator coefficient arriving from
// above (g_in, a bounded-value element of S bits) and adds the product to its
// accumulator; in GF(2^N) the addition is an N-bit XOR.  The PE is output
// stationary: it keeps one element of the X tile.  A control word travels
// with the B element: `first` restarts the accumulator, `last` emits the sum
// on res/res_valid/res_tag one cycle later, so a new tile can follow the
// previous one without a gap.
//
// a_in/ctl_in are forwarded to the right and g_in downwards through one
// register each, which makes the operands of neighbouring PEs meet with the
// systolic skew.  Multiplier and XOR are the paper's; the control word and
// the output-stationary dataflow are this design's choice.
module ff_pe
  import bats_pkg::*;
#(
  parameter int unsigned N = ELEM_W,
  parameter int unsigned S = BV_S
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  a_in,
  input  pe_ctl_t       ctl_in,
  input  logic [S-1:0]  g_in,
  output logic [N-1:0]  a_out,
  output pe_ctl_t       ctl_out,
  output logic [S-1:0]  g_out,
  output logic [N-1:0]  res,
  output logic          res_valid,
  output logic [3:0]    res_tag
);

  logic [N-1:0] prod, acc, sum;

  gf_mul_bv #(.N(N), .S(S)) u_mul (.a(a_in), .b(g_in), .p(prod));

  assign sum = ctl_in.first ? prod : (acc ^ prod);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out     <= '0;
      ctl_out   <= '0;
      g_out     <= '0;
      acc       <= '0;
      res       <= '0;
      res_valid <= 1'b0;
      res_tag   <= '0;
    end else begin
      a_out     <= a_in;
      ctl_out   <= ctl_in;
      g_out     <= g_in;
      res_valid <= ctl_in.valid && ctl_in.last;
      if (ctl_in.valid) begin
        acc <= sum;
        if (ctl_in.last) begin
          res     <= sum;
          res_tag <= ctl_in.tag;
        end
      end
    end
  end

endmodule
