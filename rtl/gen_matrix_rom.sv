// gen_matrix_rom -- on-chip ROM of the bounded-value generator matrices.
//
// CS-BATS reuses one fixed generator matrix G_r (dg_r x M) per base-graph
// row r for every batch built from that row, so all of them live on chip.
// Word `addr` holds one row of one matrix: the M coefficients G_r[k][0..M-1]
// of S bits each (coefficient j in bits j*S +: S).  Matrix r starts at word
// bg_offset(r); with the degrees {11,12,14,14,19,20,27,32} the ROM has 149
// words of 32 bits, i.e. 2384 two-bit entries (596 bytes).  With S = 8 the
// same ROM holds ordinary GF(2^8) generators (4x the size).
//
// The contents come from bats_pkg::gen_coef() (a placeholder: the paper does
// not publish its matrices).  Read latency is one clock, as for a block RAM.
module gen_matrix_rom
  import bats_pkg::*;
#(
  parameter int unsigned M     = BATCH_M,
  parameter int unsigned S     = BV_S,
  parameter int unsigned ROWS  = BG_ROWS,
  parameter int unsigned DEPTH = BG_EDGES,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic [AW-1:0]   addr,
  output logic [M*S-1:0]  data
);

  // word w belongs to row r, edge k = w - bg_offset(r)
  function automatic logic [M*S-1:0] rom_word(input int unsigned w);
    logic [M*S-1:0] v = '0;
    int unsigned r = 0;
    for (int unsigned q = 0; q < ROWS; q++)
      if (w >= bg_offset(q)) r = q;
    for (int unsigned j = 0; j < M; j++)
      v[j*S +: S] = S'(gen_coef(r, w - bg_offset(r), j));
    return v;
  endfunction

  logic [M*S-1:0] rom [DEPTH];

  for (genvar w = 0; w < DEPTH; w++) begin : g_word
    localparam logic [M*S-1:0] WORD = rom_word(w);
    assign rom[w] = WORD;
  end

  always_ff @(posedge clk) begin
    data <= rom[addr];
  end

endmodule
