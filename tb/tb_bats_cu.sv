// tb_bats_cu -- one BATS CU at the default sizes (pk = 256, M = 16, 8x8
// tiles, L(2^2) generators) builds ten batches (every base row, shifts 0
// and 1) from the HBM read model (90-cycle latency) into a write sink that
// accepts a beat only 35% of the time.  Every one of the 10 x 256 x 16
// coded elements is compared with the reference X = B*G computed in
// GF(2^8); the test also checks that no address is written twice and that
// both stall kinds (waiting for B, waiting for an output bank) occurred,
// and reports the cycles per batch against the 64*dg issue cycles.
module tb_bats_cu;
  import bats_pkg::*;
  import tb_ref_pkg::*;

  localparam longint IN_BASE  = 64'h0_0400_0000;
  localparam longint OUT_BASE = 64'h1_0000_0000;
  localparam int NB = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, rd_req_valid, rd_req_ready, rd_rsp_valid, rd_rsp_ready;
  logic wr_valid, wr_ready, idle, ev_in_stall, ev_out_stall;
  batch_cmd_t cmd;
  addr_t rd_req_addr;
  beat_t rd_rsp_data;
  wr_req_t wr_req;
  int checks = 0, failures = 0, in_st = 0, out_st = 0;
  longint cyc = 0;

  bats_cu dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .in_base(addr_t'(IN_BASE)),
    .out_base(addr_t'(OUT_BASE)), .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid,
    .rd_rsp_ready, .rd_rsp_data, .wr_valid, .wr_ready, .wr_req, .idle, .ev_in_stall, .ev_out_stall);

  hbm_rd_model #(.LATENCY(90)) u_mem (.clk, .rst_n, .req_valid(rd_req_valid),
    .req_ready(rd_req_ready), .req_addr(rd_req_addr), .rsp_valid(rd_rsp_valid),
    .rsp_ready(rd_rsp_ready), .rsp_data(rd_rsp_data));
  hbm_wr_sink #(.READY_PCT(35)) u_sink (.clk, .rst_n, .wr_valid, .wr_ready, .wr_req);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev_in_stall) in_st++;
    if (ev_out_stall) out_st++;
  end

  initial begin
    longint t0;
    int issue = 0;
    cmd_valid = 0; cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = cyc;
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      cmd_valid = 1; cmd.batch_id = 16'(b); cmd.row = 8'(b % 8); cmd.shift = 16'(b / 8);
      issue += 64 * bg_degree(b % 8);
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      @(negedge clk) cmd_valid = 0;
    end
    @(negedge clk);
    while (!idle) @(negedge clk);
    $display("%0d batches: %0d cycles, %0d issue cycles, input stalls %0d, output stalls %0d",
             NB, cyc - t0, issue, in_st, out_st);
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < 256; r++)
        for (int m = 0; m < 16; m++) begin
          automatic longint a = OUT_BASE + (b * 32 + r / 8) * 128 + m * 8 + r % 8;
          checks++;
          if (u_sink.byte_at(a) !== expected_x(b, r, m, IN_BASE, 256, 256)) begin
            failures++;
            if (failures < 5) $display("batch %0d r %0d m %0d: %h vs %h", b, r, m,
                                       u_sink.byte_at(a), expected_x(b, r, m, IN_BASE, 256, 256));
          end
        end
    checks += 4;
    if (u_sink.rewrites != 0) failures++;
    if (u_sink.nbeats != NB * 32 * 2) failures++;
    if (in_st == 0) failures++;
    if (out_st == 0) failures++;
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
