// accel_exp_run -- testbench harness: one accelerator in a given
// configuration (NCU compute units, NAXI read adapters, NOUT write ports)
// with its own behavioural HBM read ports (90-cycle latency, all holding
// the same input copy) and its own write capture.  Every write port
// accepts a beat with probability WR_PCT percent.  On `go` it runs one job
// of NB batches with load-balanced scheduling, then compares every coded
// element with the GF(2^8) reference and the reversal count with the
// number of batches in odd layers.  `fin` rises when the check is done;
// checks, failures and the job's cycle count are then valid.  Not
// synthesizable.
module accel_exp_run
  import bats_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int unsigned NCU    = 8,
  parameter int unsigned NAXI   = 8,
  parameter int unsigned NOUT   = 1,
  parameter int unsigned NB     = 32,
  parameter int unsigned WR_PCT = 34
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic fin,
  output int   checks,
  output int   failures,
  output int   cycles,
  output int   rd_contend
);
  localparam longint IN_BASE  = 64'h0_1000_0000;
  localparam longint OUT_BASE = 64'h1_0000_0000;

  logic        start, busy, done;
  logic        rd_req_valid [NAXI], rd_req_ready [NAXI], rd_rsp_valid [NAXI], rd_rsp_ready [NAXI];
  addr_t       rd_req_addr [NAXI];
  beat_t       rd_rsp_data [NAXI];
  logic        wr_valid [NOUT], wr_ready [NOUT];
  wr_req_t     wr_req [NOUT];
  logic [31:0] cnt_in_stall, cnt_out_stall, cnt_reverse, cnt_wr_contend, cnt_rd_contend;

  bats_accel #(.NCU(NCU), .NAXI(NAXI), .NOUT(NOUT)) dut (.clk, .rst_n, .start,
    .num_batches(16'(NB)), .lbs_en(1'b1), .in_base(addr_t'(IN_BASE)), .out_base(addr_t'(OUT_BASE)),
    .busy, .done, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid,
    .rd_rsp_ready, .rd_rsp_data, .wr_valid, .wr_ready, .wr_req, .cnt_in_stall, .cnt_out_stall,
    .cnt_reverse, .cnt_wr_contend, .cnt_rd_contend);

  for (genvar p = 0; p < NAXI; p++) begin : g_pc
    hbm_rd_model #(.LATENCY(90)) u_mem (.clk, .rst_n, .req_valid(rd_req_valid[p]),
      .req_ready(rd_req_ready[p]), .req_addr(rd_req_addr[p]), .rsp_valid(rd_rsp_valid[p]),
      .rsp_ready(rd_rsp_ready[p]), .rsp_data(rd_rsp_data[p]));
  end

  // write capture for all ports
  logic [7:0] mem [longint];
  int rewrites;
  always @(posedge clk) begin
    for (int o = 0; o < NOUT; o++) begin
      if (rst_n && wr_valid[o] && wr_ready[o])
        for (int i = 0; i < BEAT_BYTES; i++) begin
          automatic longint a = longint'(wr_req[o].addr) + i;
          if (mem.exists(a)) rewrites++;
          mem[a] = wr_req[o].data[i*8 +: 8];
        end
      wr_ready[o] <= ($urandom % 100) < WR_PCT;
    end
  end

  initial begin
    fin = 0; start = 0; checks = 0; failures = 0; cycles = 0; rewrites = 0; rd_contend = 0;
    @(posedge go);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) begin @(negedge clk); cycles++; end
    rd_contend = int'(cnt_rd_contend);
    begin
      automatic int rev = 0;
      for (int b = 0; b < int'(NB); b++) if ((b / BG_ROWS) % 2 == 1) rev++;
      checks += 2;
      if (cnt_reverse != 32'(rev)) failures++;
      if (rewrites != 0) failures++;
    end
    for (int b = 0; b < int'(NB); b++)
      for (int r = 0; r < PKT_LEN; r++)
        for (int m = 0; m < BATCH_M; m++) begin
          automatic longint a = OUT_BASE + (b * 32 + r / 8) * 128 + m * 8 + r % 8;
          checks++;
          if (!mem.exists(a) || mem[a] !== expected_x(b, r, m, IN_BASE, PKT_LEN, NUM_PKT))
            failures++;
        end
    fin = 1;
  end
endmodule
