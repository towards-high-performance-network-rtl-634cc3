// systolic_array -- TM x TN output-stationary systolic array of ff_pe.
//
// Computes X_tile = B_tile * G_tile over GF(2^N).  Every cycle the caller
// presents one column k of the B tile (b_col, TM elements), the matching row
// k of the G tile (g_row, TN bounded-value coefficients) and a control word
// (valid/first/last/tag).  The array skews the inputs itself: row i of B and
// its control word are delayed i cycles, column j of G is delayed j cycles,
// so a B element and the G coefficient it meets arrive at PE(i,j) i+j cycles
// after issue.  B flows to the right, G flows down.
//
// Timing: if the last k of a tile is issued in cycle t, PE(i,j) presents its
// result X[i][j] with res_valid in cycle t+i+j+1; PE(TM-1,TN-1) is the last,
// TM+TN-1 cycles after the last issue.  Tiles can be issued back to back.
// The array structure is named by the paper; the skewing and the per-PE
// result outputs are this design's choice.
module systolic_array
  import bats_pkg::*;
#(
  parameter int unsigned TM = T_M,
  parameter int unsigned TN = T_N,
  parameter int unsigned N  = ELEM_W,
  parameter int unsigned S  = BV_S
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  b_col [TM],
  input  logic [S-1:0]  g_row [TN],
  input  pe_ctl_t       ctl,
  output logic [N-1:0]  res       [TM][TN],
  output logic          res_valid [TM][TN],
  output logic [3:0]    res_tag   [TM][TN]
);

  // horizontal (B + control) and vertical (G) links, index TN / TM = edge
  logic [N-1:0] a_link [TM][TN+1];
  pe_ctl_t      c_link [TM][TN+1];
  logic [S-1:0] g_link [TM+1][TN];

  // input skew: row i delayed by i cycles
  for (genvar i = 0; i < TM; i++) begin : g_rskew
    if (i == 0) begin : g_nodelay
      assign a_link[0][0] = b_col[0];
      assign c_link[0][0] = ctl;
    end else begin : g_delay
      logic [N-1:0] a_sr [i];
      pe_ctl_t      c_sr [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < i; d++) begin
            a_sr[d] <= '0;
            c_sr[d] <= '0;
          end
        end else begin
          a_sr[0] <= b_col[i];
          c_sr[0] <= ctl;
          for (int d = 1; d < i; d++) begin
            a_sr[d] <= a_sr[d-1];
            c_sr[d] <= c_sr[d-1];
          end
        end
      end
      assign a_link[i][0] = a_sr[i-1];
      assign c_link[i][0] = c_sr[i-1];
    end
  end

  // input skew: column j delayed by j cycles
  for (genvar j = 0; j < TN; j++) begin : g_cskew
    if (j == 0) begin : g_nodelay
      assign g_link[0][0] = g_row[0];
    end else begin : g_delay
      logic [S-1:0] g_sr [j];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < j; d++) g_sr[d] <= '0;
        end else begin
          g_sr[0] <= g_row[j];
          for (int d = 1; d < j; d++) g_sr[d] <= g_sr[d-1];
        end
      end
      assign g_link[0][j] = g_sr[j-1];
    end
  end

  for (genvar i = 0; i < TM; i++) begin : g_row_pe
    for (genvar j = 0; j < TN; j++) begin : g_col_pe
      ff_pe #(.N(N), .S(S)) u_pe (
        .clk, .rst_n,
        .a_in     (a_link[i][j]),
        .ctl_in   (c_link[i][j]),
        .g_in     (g_link[i][j]),
        .a_out    (a_link[i][j+1]),
        .ctl_out  (c_link[i][j+1]),
        .g_out    (g_link[i+1][j]),
        .res      (res[i][j]),
        .res_valid(res_valid[i][j]),
        .res_tag  (res_tag[i][j])
      );
    end
  end

endmodule
