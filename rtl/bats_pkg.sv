// bats_pkg -- shared constants, types and table functions of the CS-BATS
// encoder accelerator.
//
// The numeric defaults are the configuration of the main implementation:
// GF(2^8) with the irreducible polynomial x^8+x^4+x^3+x^2+1 (0x11D), bounded
// value (BV) generator coefficients from L(2^2) (2 bits each), batch size
// M = 16, packet size pk = 256 elements, K = 256 input packets, 8x8 tiles and
// a base graph with row degrees {11,12,14,14,19,20,27,32}, so t_k = 32.
// The memory port is 512 bits wide, so one read of a packet column brings
// t_m + alpha = 64 elements (alpha = 56).
//
// The connections of the base graph (which packets a row selects) and the
// values of the generator matrices are not published; the functions
// bg_col() and gen_coef() below define placeholder tables by a fixed formula.
// Replace them to use a real CS-BATS code; nothing else depends on the values.
package bats_pkg;

  // ---- field and code -----------------------------------------------------
  localparam int unsigned ELEM_W  = 8;          // n: bits per field element
  localparam logic [8:0]  GF_POLY = 9'h11D;     // x^8+x^4+x^3+x^2+1
  localparam int unsigned BV_S    = 2;          // s: BV subset L(2^s)
  localparam int unsigned BATCH_M = 16;         // M: coded packets per batch
  localparam int unsigned PKT_LEN = 256;        // pk: elements per packet
  localparam int unsigned NUM_PKT = 256;        // K: input packets
  localparam int unsigned BG_ROWS = 8;          // m: rows of the base graph
  localparam int unsigned T_M     = 8;          // tile rows
  localparam int unsigned T_N     = 8;          // tile columns
  localparam int unsigned T_K     = 32;         // max base-graph degree

  // ---- memory port --------------------------------------------------------
  localparam int unsigned BEAT_W     = 512;     // HBM port width (bits)
  localparam int unsigned BEAT_BYTES = BEAT_W / 8;
  localparam int unsigned ADDR_W     = 33;      // 8 GB HBM, byte address

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [BEAT_W-1:0] beat_t;

  // one-beat write request (address + data)
  typedef struct packed {
    addr_t addr;
    beat_t data;
  } wr_req_t;

  // ---- batch command from the scheduler to a CU --------------------------
  typedef struct packed {
    logic [15:0] batch_id;   // i
    logic [7:0]  row;        // i mod m
    logic [15:0] shift;      // floor(i / m): right cyclic shift
  } batch_cmd_t;

  // ---- control word travelling with the B operands through the array ------
  typedef struct packed {
    logic       valid;
    logic       first;       // first k of a tile: accumulator restarts
    logic       last;        // last k of a tile: result is emitted
    logic [3:0] tag;         // {output bank, column-tile index n}
  } pe_ctl_t;

  // ---- base graph ---------------------------------------------------------
  // Row degrees of the base graph used for the implementation results.
  function automatic int unsigned bg_degree(input int unsigned row);
    case (row % BG_ROWS)
      0: return 11;  1: return 12;  2: return 14;  3: return 14;
      4: return 19;  5: return 20;  6: return 27;  default: return 32;
    endcase
  endfunction

  // First ROM word of a row: prefix sum of the degrees.
  function automatic int unsigned bg_offset(input int unsigned row);
    int unsigned s = 0;
    for (int unsigned r = 0; r < BG_ROWS; r++)
      if (r < row) s += bg_degree(r);
    return s;
  endfunction

  localparam int unsigned BG_EDGES = bg_offset(BG_ROWS);   // 149

  // Packet selected by edge k of base-graph row `row` (before the shift).
  // Placeholder: an arithmetic progression of stride 7, distinct for k < K.
  function automatic int unsigned bg_col(input int unsigned row,
                                         input int unsigned k,
                                         input int unsigned num_pkt);
    return (row * 29 + k * 7) % num_pkt;
  endfunction

  // Generator coefficient G_row[k][j], an element of L(2^BV_S).
  // Placeholder: a fixed integer hash of (row, k, j).
  function automatic logic [BV_S-1:0] gen_coef(input int unsigned row,
                                               input int unsigned k,
                                               input int unsigned j);
    int unsigned h;
    h = (row * 131 + k * 37 + j * 11 + k * j * 7 + 5) * 32'd2654435761;
    return BV_S'(h >> 13);
  endfunction

endpackage
