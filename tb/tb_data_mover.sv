// tb_data_mover -- runs the read side of the data mover for ten batches
// (all base rows, shifts 0 and 1) against the HBM read model (90-cycle
// latency, request ready 70% of the time), with a consumer that releases a
// full B bank after a random delay.  Checks every read address (packet
// (bg_col(row,k)+shift) mod K, super-tile J), that column k of super-tile J
// is written to bank J mod 2 with exactly the data at that address, that a
// bank is never written while full, and that each batch fills PK/64 banks.
module tb_data_mover;
  import bats_pkg::*;

  localparam longint IN_BASE = 64'h1000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, rd_busy, rd_req_valid, rd_req_ready, rd_rsp_valid, rd_rsp_ready;
  batch_cmd_t  cmd;
  addr_t       rd_req_addr;
  beat_t       rd_rsp_data;
  logic        bw_en, bw_bank, b_fill_done, b_fill_bank;
  logic [4:0]  bw_col;
  logic [511:0] bw_data;
  logic [1:0]  b_full;
  logic        alloc_ready, alloc_bank, wr_valid, wr_idle;
  wr_req_t     wr_req;
  logic [7:0]  res [8][8];
  logic        res_valid [8][8];
  logic [3:0]  res_tag [8][8];
  int checks = 0, failures = 0, fills = 0;

  data_mover dut (.clk, .rst_n, .start, .cmd, .in_base(addr_t'(IN_BASE)), .rd_busy,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_ready, .rd_rsp_data,
    .bw_en, .bw_bank, .bw_col, .bw_data, .b_fill_done, .b_fill_bank, .b_full,
    .alloc(1'b0), .alloc_addr('0), .alloc_ready, .alloc_bank,
    .res, .res_valid, .res_tag, .wr_valid, .wr_ready(1'b1), .wr_req, .wr_idle);

  hbm_rd_model #(.LATENCY(90), .READY_PCT(70)) u_mem (.clk, .rst_n,
    .req_valid(rd_req_valid), .req_ready(rd_req_ready), .req_addr(rd_req_addr),
    .rsp_valid(rd_rsp_valid), .rsp_ready(rd_rsp_ready), .rsp_data(rd_rsp_data));

  initial foreach (res_valid[i, j]) begin res_valid[i][j] = 0; res[i][j] = 0; res_tag[i][j] = 0; end

  typedef struct { longint addr; int j; int k; } rd_t;
  rd_t reqq[$], rspq[$];

  function automatic beat_t beat_at(input longint a);
    beat_t b;
    for (int i = 0; i < 64; i++) b[i*8 +: 8] = tb_ref_pkg::mem_byte(a + i);
    return b;
  endfunction

  // request / response monitors
  always @(negedge clk) if (rst_n) begin
    if (rd_req_valid && rd_req_ready) begin
      automatic rd_t e = reqq.pop_front();
      checks++;
      if (longint'(rd_req_addr) != e.addr) begin
        failures++;
        if (failures < 4) $display("req addr %h vs %h", rd_req_addr, e.addr);
      end
      rspq.push_back(e);
    end
    if (bw_en) begin
      automatic rd_t e = rspq.pop_front();
      checks++;
      if (int'(bw_col) != e.k || bw_bank != 1'(e.j) || bw_data !== beat_at(e.addr)
          || b_full[bw_bank]) failures++;
    end
    checks++;
    if (wr_valid || !wr_idle) failures++;
  end

  // consumer of full banks
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) b_full <= '0;
    else begin
      if (b_fill_done) begin b_full[b_fill_bank] <= 1'b1; fills++; end
      for (int b = 0; b < 2; b++)
        if (b_full[b] && $urandom_range(40) == 0) b_full[b] <= 1'b0;
    end
  end

  initial begin
    start = 0; cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int bid = 0; bid < 10; bid++) begin
      automatic int row = bid % 8, shift = bid / 8;
      for (int j = 0; j < 4; j++)
        for (int k = 0; k < bg_degree(row); k++) begin
          automatic int p = (bg_col(row, k, 256) + shift) % 256;
          reqq.push_back('{addr: IN_BASE + p * 256 + j * 64, j: j, k: k});
        end
      @(negedge clk);
      start = 1; cmd.batch_id = 16'(bid); cmd.row = 8'(row); cmd.shift = 16'(shift);
      @(negedge clk); start = 0;
      while (rd_busy) @(negedge clk);
      checks += 2;
      if (reqq.size() != 0 || rspq.size() != 0) failures++;
      if (fills != 4 * (bid + 1)) failures++;
      while (b_full != 0) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
