// tb_axi_rd_adapter -- two CUs bundled on one read adapter (NIN = 2) and
// one CU on its own adapter (default NIN = 1), each adapter in front of an
// HBM read model (latency 90, request ready 60%).  The CUs issue reads to
// random addresses at random times and accept data at random; every CU must
// receive exactly the data of its own reads, in its own order.  Contention
// between the two bundled CUs must be reported.
module tb_axi_rd_adapter;
  import bats_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, contend = 0;

  // three requesters: 0,1 on the bundled adapter, 2 alone
  logic  rq_v [3], rq_r [3], rs_v [3], rs_r [3];
  addr_t rq_a [3];
  beat_t rs_d [3];
  longint pend [3][$];
  int nrsp [3];

  logic  m_rq_v [2], m_rq_r [2], m_rs_v [2], m_rs_r [2];
  addr_t m_rq_a [2];
  beat_t m_rs_d [2];
  logic  ev2, ev1;

  axi_rd_adapter #(.NIN(2)) dut2 (.clk, .rst_n,
    .in_req_valid(rq_v[0:1]), .in_req_ready(rq_r[0:1]), .in_req_addr(rq_a[0:1]),
    .in_rsp_valid(rs_v[0:1]), .in_rsp_ready(rs_r[0:1]), .in_rsp_data(rs_d[0:1]),
    .mem_req_valid(m_rq_v[0]), .mem_req_ready(m_rq_r[0]), .mem_req_addr(m_rq_a[0]),
    .mem_rsp_valid(m_rs_v[0]), .mem_rsp_ready(m_rs_r[0]), .mem_rsp_data(m_rs_d[0]),
    .ev_contend(ev2));
  axi_rd_adapter dut1 (.clk, .rst_n,
    .in_req_valid(rq_v[2:2]), .in_req_ready(rq_r[2:2]), .in_req_addr(rq_a[2:2]),
    .in_rsp_valid(rs_v[2:2]), .in_rsp_ready(rs_r[2:2]), .in_rsp_data(rs_d[2:2]),
    .mem_req_valid(m_rq_v[1]), .mem_req_ready(m_rq_r[1]), .mem_req_addr(m_rq_a[1]),
    .mem_rsp_valid(m_rs_v[1]), .mem_rsp_ready(m_rs_r[1]), .mem_rsp_data(m_rs_d[1]),
    .ev_contend(ev1));

  for (genvar p = 0; p < 2; p++) begin : g_mem
    hbm_rd_model #(.LATENCY(90), .READY_PCT(60)) u_mem (.clk, .rst_n,
      .req_valid(m_rq_v[p]), .req_ready(m_rq_r[p]), .req_addr(m_rq_a[p]),
      .rsp_valid(m_rs_v[p]), .rsp_ready(m_rs_r[p]), .rsp_data(m_rs_d[p]));
  end

  function automatic beat_t beat_at(input longint a);
    beat_t b;
    for (int i = 0; i < 64; i++) b[i*8 +: 8] = tb_ref_pkg::mem_byte(a + i);
    return b;
  endfunction

  bit stop = 0;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < 3; c++) begin rq_v[c] <= 0; rq_a[c] <= '0; rs_r[c] <= 0; end
    end else begin
      for (int c = 0; c < 3; c++) begin
        if (rq_v[c] && rq_r[c]) pend[c].push_back(longint'(rq_a[c]));
        if (!rq_v[c] || rq_r[c]) begin
          rq_v[c] <= !stop && ($urandom_range(3) != 0);
          rq_a[c] <= addr_t'({$urandom_range(1 << 20), 6'b0});
        end
        rs_r[c] <= ($urandom_range(4) != 0);
      end
      if (ev2) contend++;
    end
  end

  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < 3; c++)
      if (rs_v[c] && rs_r[c]) begin
        checks++;
        begin
        automatic longint a = (pend[c].size() == 0) ? -1 : pend[c].pop_front();
        if (a < 0 || rs_d[c] !== beat_at(a)) begin
          failures++;
          $display("req %0d data mismatch at %0t addr %h", c, $time, a);
        end
        end
        nrsp[c]++;
      end
    checks++;
    if (ev1) begin failures++; $display("ev1"); end
  end

  initial begin
    nrsp = '{0, 0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    stop = 1;
    repeat (400) @(posedge clk);
    for (int c = 0; c < 3; c++) begin
      checks += 2;
      if (pend[c].size() != 0) begin failures++; $display("req %0d: %0d pending", c, pend[c].size()); end
      if (nrsp[c] < 100) failures++;
    end
    checks++;
    if (contend == 0) failures++;
    $display("responses %0d %0d %0d, contention cycles %0d", nrsp[0], nrsp[1], nrsp[2], contend);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
