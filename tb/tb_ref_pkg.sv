// tb_ref_pkg -- reference arithmetic for the testbenches, written
// independently of the RTL: GF(2^8) multiplication by carry-less product and
// polynomial division, the byte pattern held by the memory models, and the
// expected coded element X[r][m] of a batch.
package tb_ref_pkg;

  // carry-less multiply, then reduce modulo x^8+x^4+x^3+x^2+1
  function automatic logic [7:0] gf_mul_ref(input logic [7:0] a, input logic [7:0] b);
    logic [15:0] p = '0;
    for (int i = 0; i < 8; i++)
      if (b[i]) p ^= 16'(a) << i;
    for (int i = 15; i >= 8; i--)
      if (p[i]) p ^= 16'h11D << (i - 8);
    return p[7:0];
  endfunction

  // content of the input memory: byte at address a
  function automatic logic [7:0] mem_byte(input longint unsigned a);
    longint unsigned h;
    h = a * 40503 + (a >> 8) * 97 + 11;
    return 8'(h ^ (h >> 9));
  endfunction

  // expected coded element: row r of coded packet m of batch `bid`
  function automatic logic [7:0] expected_x(input int unsigned bid, input int unsigned r,
                                            input int unsigned m, input longint unsigned in_base,
                                            input int unsigned pk, input int unsigned k_pkts);
    int unsigned row, shift, dg, p;
    logic [7:0] x = '0;
    row   = bid % bats_pkg::BG_ROWS;
    shift = bid / bats_pkg::BG_ROWS;
    dg    = bats_pkg::bg_degree(row);
    for (int unsigned k = 0; k < dg; k++) begin
      p = (bats_pkg::bg_col(row, k, k_pkts) + shift) % k_pkts;
      x ^= gf_mul_ref(mem_byte(in_base + longint'(p) * longint'(pk) + longint'(r)),
                      8'(bats_pkg::gen_coef(row, k, m)));
    end
    return x;
  endfunction

endpackage
