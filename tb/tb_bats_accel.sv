// tb_bats_accel -- end-to-end test of the accelerator at its default
// configuration: 8 CUs, 8 read ports (one HBM pseudo channel each, all
// holding the same input copy, 90-cycle latency), one shared write port.
// The write port accepts a beat 34% of the time, about the 52 Gb/s write
// rate reported for this configuration out of 153.6 Gb/s (512 bits at
// 300 MHz).
//
// Job 1 encodes 32 batches with load-balanced scheduling; job 2 switches
// to sequential scheduling and encodes 16 batches to another output area.
// Every coded element of both jobs is compared with the GF(2^8) reference.
// The test counts, and fails if any never happened: input stalls (CU
// waiting for B), output-buffer stalls (ping-pong full), reversed
// dispatches (load balancing), write-port contention between CUs, and the
// scheduling-mode switch.  It prints cycles and the throughput at 300 MHz.
module tb_bats_accel;
  import bats_pkg::*;
  import tb_ref_pkg::*;

  localparam int NCU = 8, NAXI = 8, NOUT = 1;
  localparam longint IN_BASE = 64'h0_1000_0000;
  localparam longint OUT1    = 64'h1_0000_0000;
  localparam longint OUT2    = 64'h1_4000_0000;

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

  bats_accel dut (.clk, .rst_n, .start, .num_batches, .lbs_en, .in_base(addr_t'(IN_BASE)),
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

  int ev_in, ev_out, ev_rev, ev_wrc, ev_mode;

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
    ev_wrc += cnt_wr_contend;
    checks++;
    if (cnt_reverse != (lbs ? 32'((nb / 8 / 2) * 8 + ((nb / 8) % 2 ? nb % 8 : 0)) : 0)) failures++;
    for (int b = 0; b < nb; b++)
      for (int r = 0; r < 256; r++)
        for (int m = 0; m < 16; m++) begin
          automatic longint a = obase + (b * 32 + r / 8) * 128 + m * 8 + r % 8;
          checks++;
          if (!u_sink.written(a) || u_sink.byte_at(a) !== expected_x(b, r, m, IN_BASE, 256, 256)) begin
            failures++;
            bad++;
            if (bad < 4) $display("  batch %0d r %0d m %0d wrong", b, r, m);
          end
        end
  endtask

  initial begin
    start = 0; lbs_en = 1; num_batches = 0; out_base = '0;
    ev_in = 0; ev_out = 0; ev_rev = 0; ev_wrc = 0; ev_mode = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_job(32, 1, OUT1);
    run_job(16, 0, OUT2);
    ev_mode = 1;
    checks++;
    if (u_sink.rewrites != 0) failures++;
    checks += 5;
    if (ev_in == 0)  begin failures++; $display("no input stall"); end
    if (ev_out == 0) begin failures++; $display("no output stall"); end
    if (ev_rev == 0) begin failures++; $display("no reversed dispatch"); end
    if (ev_wrc == 0) begin failures++; $display("no write-port contention"); end
    if (ev_mode == 0) failures++;
    $display("mechanisms: input stalls %0d, output stalls %0d, reversed dispatches %0d, write contention %0d, mode switches %0d",
             ev_in, ev_out, ev_rev, ev_wrc, ev_mode);
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
