// tb_transpose_buffer -- allocates output banks, writes 8x8 result tiles
// for both column tiles into them as the array would, and checks the
// streamed beats: address = allocation address + 64*beat, and element
// X[i][n*8+j] at byte ((n*8+j)*8+i) of the 128-byte block.  The write port
// is back-pressured at random so that both banks fill up and the allocation
// must wait (the ping-pong stall), which is checked to occur.
module tb_transpose_buffer;
  import bats_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       alloc, alloc_ready, alloc_bank, out_valid, out_ready, idle;
  addr_t      alloc_addr;
  logic [7:0] res [8][8];
  logic       res_valid [8][8];
  logic [3:0] res_tag [8][8];
  wr_req_t    out_req;
  int checks = 0, failures = 0, stalls = 0, beats = 0;

  transpose_buffer dut (.clk, .rst_n, .alloc, .alloc_addr, .alloc_ready, .alloc_bank,
                        .res, .res_valid, .res_tag, .out_valid, .out_ready, .out_req, .idle);

  wr_req_t expq[$];

  always @(posedge clk) out_ready <= ($urandom_range(3) == 0);

  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    automatic wr_req_t e = expq.pop_front();
    checks++;
    beats++;
    if (out_req !== e) begin
      failures++;
      if (failures < 4) $display("beat addr %h vs %h", out_req.addr, e.addr);
    end
  end

  initial begin
    logic [1023:0] blk;
    alloc = 0; alloc_addr = 0;
    foreach (res_valid[i, j]) begin res_valid[i][j] = 0; res[i][j] = 0; res_tag[i][j] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); checks++; if (!idle || !alloc_ready) failures++;
    for (int g = 0; g < 40; g++) begin
      logic bank;
      @(negedge clk);
      while (!alloc_ready) begin stalls++; @(negedge clk); end
      alloc = 1; alloc_addr = addr_t'(g * 128 + 4096); bank = alloc_bank;
      @(negedge clk); alloc = 0;
      for (int n = 0; n < 2; n++) begin
        foreach (res[i, j]) begin
          res[i][j] = 8'($urandom); res_valid[i][j] = 1; res_tag[i][j] = {bank, 3'(n)};
          blk[((n*8 + j)*8 + i)*8 +: 8] = res[i][j];
        end
        @(negedge clk);
        foreach (res_valid[i, j]) res_valid[i][j] = 0;
      end
      expq.push_back('{addr: addr_t'(g * 128 + 4096), data: blk[511:0]});
      expq.push_back('{addr: addr_t'(g * 128 + 4096 + 64), data: blk[1023:512]});
    end
    while (expq.size() > 0) @(negedge clk);
    repeat (3) @(negedge clk);
    checks += 3;
    if (beats != 80) failures++;
    if (stalls == 0) failures++;
    if (!idle) failures++;
    $display("stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
