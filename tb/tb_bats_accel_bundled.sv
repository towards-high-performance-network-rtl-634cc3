// tb_bats_accel_bundled -- end-to-end test of a bundled-port variant of
// the accelerator: 8 CUs on 4 read adapters (two CUs per adapter and HBM
// pseudo channel) and 2 shared write ports (four CUs per port), each port
// accepting a beat 34% of the time.  One load-balanced job of 24 batches;
// every coded element is compared with the GF(2^8) reference, and
// contention on the read adapters and on both write ports must occur.
module tb_bats_accel_bundled;
  import bats_pkg::*;
  import tb_ref_pkg::*;

  localparam int NCU = 8, NAXI = 4, NOUT = 2;
  localparam longint IN_BASE = 64'h0_1000_0000;
  localparam longint OUT1    = 64'h1_0000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, lbs_en, busy, done;
  logic [15:0] num_batches;
  addr_t       out_base;
  logic        rd_req_valid [NAXI], rd_req_ready [NAXI], rd_rsp_valid [NAXI], rd_rsp_ready [NAXI];
  addr_t       rd_req_addr [NAXI];
  beat_t       rd_rsp_data [NAXI];
  logic        wr_valid [NOUT], wr_ready [NOUT];
  wr_req_t     wr_req [NOUT];
  logic [31:0] cnt_in_stall, cnt_out_stall, cnt_reverse, cnt_wr_contend, cnt_rd_contend;
  int checks = 0, failures = 0;

  bats_accel #(.NCU(NCU), .NAXI(NAXI), .NOUT(NOUT)) dut (.clk, .rst_n, .start, .num_batches, .lbs_en, .in_base(addr_t'(IN_BASE)),
    .out_base, .busy, .done, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid,
    .rd_rsp_ready, .rd_rsp_data, .wr_valid, .wr_ready, .wr_req, .cnt_in_stall, .cnt_out_stall,
    .cnt_reverse, .cnt_wr_contend, .cnt_rd_contend);

  for (genvar p = 0; p < NAXI; p++) begin : g_pc
    hbm_rd_model #(.LATENCY(90)) u_mem (.clk, .rst_n, .req_valid(rd_req_valid[p]),
      .req_ready(rd_req_ready[p]), .req_addr(rd_req_addr[p]), .rsp_valid(rd_rsp_valid[p]),
      .rsp_ready(rd_rsp_ready[p]), .rsp_data(rd_rsp_data[p]));
  end
  hbm_wr_sink #(.READY_PCT(34)) u_sink (.clk, .rst_n, .wr_valid(wr_valid[0]),
    .wr_ready(wr_ready[0]), .wr_req(wr_req[0]));
  hbm_wr_sink #(.READY_PCT(34)) u_sink2 (.clk, .rst_n, .wr_valid(wr_valid[1]),
    .wr_ready(wr_ready[1]), .wr_req(wr_req[1]));

  int ev_in, ev_out, ev_rev, ev_wrc, ev_rdc;

  task automatic run_job(input int nb, input bit lbs, input longint obase);
    longint cycles = 0;
    int bad = 0;
    @(negedge clk);
    start = 1; num_batches = 16'(nb); lbs_en = lbs; out_base = addr_t'(obase);
    @(negedge clk) start = 0;
    while (!done) begin @(negedge clk); cycles++; end
    $display("job: %0d batches, lbs=%0d: %0d cycles, %.1f Gb/s at 300 MHz", nb, lbs, cycles,
             real'(nb) * 256.0 * 16.0 * 8.0 * 0.3 / real'(cycles));
    $display("  stalls in %0d out %0d, reversed %0d, write contention %0d, read contention %0d",
             cnt_in_stall, cnt_out_stall, cnt_reverse, cnt_wr_contend, cnt_rd_contend);
    ev_in += cnt_in_stall; ev_out += cnt_out_stall; ev_rev += cnt_reverse;
    ev_wrc += cnt_wr_contend; ev_rdc += cnt_rd_contend;
    checks++;
    if (cnt_reverse != (lbs ? 32'((nb / 8 / 2) * 8 + ((nb / 8) % 2 ? nb % 8 : 0)) : 0)) failures++;
    for (int b = 0; b < nb; b++)
      for (int r = 0; r < 256; r++)
        for (int m = 0; m < 16; m++) begin
          automatic longint a = obase + (b * 32 + r / 8) * 128 + m * 8 + r % 8;
          checks++;
          if (!(u_sink.written(a) ? u_sink.byte_at(a) === expected_x(b, r, m, IN_BASE, 256, 256)
                : (u_sink2.written(a) && u_sink2.byte_at(a) === expected_x(b, r, m, IN_BASE, 256, 256)))) begin
            failures++;
            bad++;
            if (bad < 4) $display("  batch %0d r %0d m %0d wrong", b, r, m);
          end
        end
  endtask

  initial begin
    start = 0; lbs_en = 1; num_batches = 0; out_base = '0;
    ev_in = 0; ev_out = 0; ev_rev = 0; ev_wrc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    ev_rdc = 0;
    run_job(24, 1, OUT1);
    checks += 3;
    if (u_sink.rewrites != 0 || u_sink2.rewrites != 0) failures++;
    if (u_sink.nbeats == 0 || u_sink2.nbeats == 0) failures++;
    if (ev_rdc == 0) begin failures++; $display("no read-adapter contention"); end
    checks += 4;
    if (ev_in == 0)  begin failures++; $display("no input stall"); end
    if (ev_out == 0) begin failures++; $display("no output stall"); end
    if (ev_rev == 0) begin failures++; $display("no reversed dispatch"); end
    if (ev_wrc == 0) begin failures++; $display("no write-port contention"); end
    $display("mechanisms: input stalls %0d, output stalls %0d, reversed dispatches %0d, write contention %0d, read contention %0d",
             ev_in, ev_out, ev_rev, ev_wrc, ev_rdc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
