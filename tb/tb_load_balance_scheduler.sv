// tb_load_balance_scheduler -- reproduces the scheduling example of four
// CUs building 16 batches from a base graph with row degrees
// {11,12,14,14,16,19,20,27}.  Sequential order must give the CUs the rows
// 11,16,11,16 / 12,19,12,19 / 14,20,14,20 / 14,27,14,27 (work 54/62/68/82);
// load-balanced order reverses the CUs in every odd layer, giving work
// 68/65/65/68.  Also checks, with 8 CUs and 21 batches, every command's
// batch id, row, shift and CU, the handshake wait for a busy CU, and the
// count of reversed dispatches.
module tb_load_balance_scheduler;
  import bats_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int ex_deg [8] = '{11, 12, 14, 14, 16, 19, 20, 27};

  // 4-CU instance
  logic start4, disp4, rev4, lbs;
  logic [3:0] v4, rdy4;
  batch_cmd_t cmd4;
  logic [15:0] nb;
  load_balance_scheduler #(.NCU(4)) dut4 (.clk, .rst_n, .start(start4), .num_batches(nb),
    .lbs_en(lbs), .dispatching(disp4), .cmd_valid(v4), .cmd_ready(rdy4), .cmd(cmd4),
    .ev_reverse(rev4));

  // 8-CU instance (default)
  logic start8, disp8, rev8;
  logic [7:0] v8, rdy8;
  batch_cmd_t cmd8;
  load_balance_scheduler dut8 (.clk, .rst_n, .start(start8), .num_batches(nb),
    .lbs_en(1'b1), .dispatching(disp8), .cmd_valid(v8), .cmd_ready(rdy8), .cmd(cmd8),
    .ev_reverse(rev8));

  int work [4];
  int nrev;

  task automatic run4(input bit use_lbs, input int exp_work [4]);
    lbs = use_lbs; nb = 16; work = '{0, 0, 0, 0}; nrev = 0;
    @(negedge clk) start4 = 1;
    @(negedge clk) start4 = 0;
    while (disp4) begin
      checks++;
      if ($countones(v4) != 1) failures++;
      for (int c = 0; c < 4; c++)
        if (v4[c] && rdy4[c]) work[c] += ex_deg[cmd4.row];
      if (rev4) nrev++;
      @(negedge clk);
    end
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (work[c] != exp_work[c]) begin
        failures++;
        $display("lbs=%0d CU%0d work %0d (exp %0d)", use_lbs, c + 1, work[c], exp_work[c]);
      end
    end
    checks++;
    if (nrev != (use_lbs ? 8 : 0)) failures++;
  endtask

  initial begin
    start4 = 0; start8 = 0; rdy4 = '1; rdy8 = '1; lbs = 1; nb = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run4(0, '{54, 62, 68, 82});
    run4(1, '{68, 65, 65, 68});
    // 8 CUs, 21 batches, random CU readiness
    nb = 21;
    @(negedge clk) start8 = 1;
    @(negedge clk) start8 = 0;
    for (int b = 0; b < 21; b++) begin
      automatic int pos = b % 8, layer = b / 8;
      automatic int cu = (layer % 2) ? 7 - pos : pos;
      rdy8 = 8'($urandom);
      while (!(v8[cu] && rdy8[cu])) begin
        checks++;
        if (v8 != (8'b1 << cu)) failures++;
        @(negedge clk); rdy8 = 8'($urandom);
      end
      checks++;
      if (int'(cmd8.batch_id) != b || int'(cmd8.row) != b % 8 || int'(cmd8.shift) != b / 8)
        failures++;
      @(negedge clk);
    end
    checks++;
    if (disp8) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
