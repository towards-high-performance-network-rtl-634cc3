// tb_out_port_share -- eight CU streams share one write port.  Phase 1:
// every CU always has beats and the port is always ready, so the port must
// serve the CUs strictly in turn, one beat each, at one beat per clock.
// Phase 2: CUs offer beats at random and the port is back-pressured at
// random.  Every beat must arrive once, unchanged, in per-CU order, and
// contention must be reported.
module tb_out_port_share;
  import bats_pkg::*;

  localparam int NIN = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic    in_valid [NIN], in_ready [NIN];
  wr_req_t in_req [NIN];
  logic    out_valid, out_ready, ev_contend;
  wr_req_t out_req;
  int checks = 0, failures = 0, contend = 0, got = 0;
  int seq_tx [NIN], seq_rx [NIN];
  bit random_mode = 0;
  int last_src = -1;

  out_port_share dut (.clk, .rst_n, .in_valid, .in_ready, .in_req, .out_valid, .out_ready,
                      .out_req, .ev_contend);

  function automatic wr_req_t mk(input int src, input int seq);
    wr_req_t r;
    r.addr = addr_t'(src * 65536 + seq * 64);
    r.data = {16{32'(src * 1000003 + seq * 7919)}};
    return r;
  endfunction

  // sources: after a handshake offer the next beat, randomly gated
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NIN; s++) begin in_valid[s] <= 0; seq_tx[s] <= 0; end
    end else begin
      for (int s = 0; s < NIN; s++) begin
        automatic int nxt = seq_tx[s] + ((in_valid[s] && in_ready[s]) ? 1 : 0);
        seq_tx[s] <= nxt;
        if (!in_valid[s] || in_ready[s]) begin
          in_valid[s] <= random_mode ? ($urandom_range(2) == 0) : 1'b1;
          in_req[s]   <= mk(s, nxt);
        end
      end
      out_ready <= random_mode ? ($urandom_range(1) == 0) : 1'b1;
      if (ev_contend) contend++;
    end
  end

  // sink
  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int src = int'(out_req.addr) / 65536;
    checks++;
    if (src >= NIN || out_req !== mk(src, seq_rx[src])) failures++;
    else seq_rx[src]++;
    if (!random_mode && last_src >= 0) begin
      checks++;
      if (src != (last_src + 1) % NIN) failures++;
    end
    last_src = src;
    got++;
  end

  initial begin
    for (int s = 0; s < NIN; s++) begin seq_rx[s] = 0; in_req[s] = '0; end
    out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    @(negedge clk) got = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (got != 200) begin failures++; $display("phase 1: %0d beats in 200 cycles", got); end
    random_mode = 1;
    repeat (3000) @(negedge clk);
    random_mode = 0;
    checks++;
    if (contend == 0) failures++;
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
