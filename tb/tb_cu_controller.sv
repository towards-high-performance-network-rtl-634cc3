// tb_cu_controller -- drives the CU controller with models of its
// surroundings (G load done after 15 cycles, B banks filled after random
// delays, output banks that become free at random) for one batch of every
// base row.  Every issued operand is checked against the expected loop
// (super-tile J, row tile js, column tile n, k): buffer addresses, first/
// last flags, output tag, output address of each allocation, bank releases,
// cycle count without stalls, and that input and output stalls both occur.
module tb_cu_controller;
  import bats_pkg::*;

  localparam longint OUT_BASE = 64'h1_2000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, mv_start, g_done, b_rd_bank, b_release, b_release_bank;
  logic alloc, alloc_ready, alloc_bank, ev_in_stall, ev_out_stall, busy;
  batch_cmd_t cmd, mv_cmd;
  logic [1:0] b_full;
  logic [4:0] b_rd_col, g_rd_row;
  logic [2:0] b_rd_sub;
  logic       g_rd_tile;
  pe_ctl_t    ctl;
  addr_t      alloc_addr;
  int checks = 0, failures = 0, in_stalls = 0, out_stalls = 0;

  cu_controller dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .out_base(addr_t'(OUT_BASE)),
    .mv_start, .mv_cmd, .g_done, .b_full, .b_rd_bank, .b_rd_col, .b_rd_sub, .b_release,
    .b_release_bank, .g_rd_tile, .g_rd_row, .ctl, .alloc, .alloc_addr, .alloc_ready,
    .alloc_bank, .ev_in_stall, .ev_out_stall, .busy);

  // environment: G loads in 15 cycles; bank J filled 30..80 cycles after
  // it was released (or after start)
  int gcnt, fill_t [2];
  logic fast;       // no stalls: everything always ready
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_done <= 0; gcnt <= -1; b_full <= '0; alloc_ready <= 1; fill_t[0] <= -1; fill_t[1] <= -1;
    end else begin
      g_done <= (gcnt == 1);
      if (mv_start) gcnt <= fast ? 2 : 15; else if (gcnt > 0) gcnt <= gcnt - 1;
      if (mv_start) begin fill_t[0] <= fast ? 1 : 40; fill_t[1] <= fast ? 1 : 90; end
      for (int b = 0; b < 2; b++) begin
        if (fill_t[b] > 0) fill_t[b] <= fill_t[b] - 1;
        if (fill_t[b] == 1) b_full[b] <= 1;
      end
      if (b_release) begin
        b_full[b_release_bank] <= 0;
        fill_t[b_release_bank] <= fast ? 1 : $urandom_range(30, 80);
      end
      alloc_ready <= fast ? 1'b1 : ($urandom_range(2) != 0);
      if (ev_in_stall) in_stalls++;
      if (ev_out_stall) out_stalls++;
    end
  end

  typedef struct { int j; int js; int n; int k; int dg; } it_t;
  it_t expq[$];
  logic cur_bank;
  int bid_now, issued;

  always @(negedge clk) if (rst_n) begin
    if (alloc) begin
      checks++;
      if (!alloc_ready || longint'(alloc_addr) != OUT_BASE +
          128 * (longint'(bid_now) * 32 + longint'(expq[0].j) * 8 + longint'(expq[0].js))) begin
        failures++;
        $display("wrong allocation address %h", alloc_addr);
      end
      cur_bank = alloc_bank;
    end
    if (ctl.valid) begin
      automatic it_t e = expq.pop_front();
      issued++;
      checks++;
      if (int'(b_rd_col) != e.k || int'(g_rd_row) != e.k || b_rd_bank != 1'(e.j)
          || int'(b_rd_sub) != e.js || int'(g_rd_tile) != e.n
          || ctl.first != (e.k == 0) || ctl.last != (e.k == e.dg - 1)
          || ctl.tag != {cur_bank, 3'(e.n)} || !b_full[b_rd_bank]) begin
        failures++;
        if (1) $display("issue mismatch J%0d js%0d n%0d k%0d", e.j, e.js, e.n, e.k);
      end
      checks++;
      if (b_release != (e.js == 7 && e.n == 1 && e.k == e.dg - 1)) begin failures++; if (1) $display("rel J%0d js%0d", e.j, e.js); end
    end
  end

  initial begin
    cmd_valid = 0; cmd = '0; fast = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++)
      for (int r = 0; r < 8; r++) begin
        automatic int dg = bg_degree(r);
        automatic int cycles = 0;
        fast = (pass == 1);
        for (int j = 0; j < 4; j++)
          for (int js = 0; js < 8; js++)
            for (int n = 0; n < 2; n++)
              for (int k = 0; k < dg; k++) expq.push_back('{j, js, n, k, dg});
        bid_now = r + 8 * pass; issued = 0;
        @(negedge clk);
        cmd_valid = 1; cmd.batch_id = 16'(bid_now); cmd.row = 8'(r); cmd.shift = 16'(pass);
        checks++; if (!cmd_ready) failures++;
        @(negedge clk); cmd_valid = 0;
        checks++; if (cmd_ready || mv_cmd.row != 8'(r)) failures++;
        while (busy) begin @(negedge clk); cycles++; end
        checks += 2;
        if (issued != 4 * 8 * 2 * dg || expq.size() != 0) begin failures++; $display("issued %0d left %0d", issued, expq.size()); end
        // without stalls: one issue per cycle after a 3-cycle G load
        if (fast && cycles != 4 * 8 * 2 * dg + 3) begin
          failures++;
          $display("row %0d: %0d cycles", r, cycles);
        end
      end
    checks += 2;
    if (in_stalls == 0) failures++;
    if (out_stalls == 0) failures++;
    $display("input stall cycles %0d, output stall cycles %0d", in_stalls, out_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
