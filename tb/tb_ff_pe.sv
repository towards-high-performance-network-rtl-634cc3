// tb_ff_pe -- drives random tiles of random length (back to back, with idle
// gaps) through one PE and checks the emitted sum, its tag and its timing
// (result valid exactly one cycle after the `last` operand), and that the
// operands are forwarded with one cycle of delay.
module tb_ff_pe;
  import bats_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] a_in, a_out, res;
  logic [1:0] g_in, g_out;
  pe_ctl_t    ctl_in, ctl_out;
  logic       res_valid;
  logic [3:0] res_tag;
  int checks = 0, failures = 0;

  ff_pe dut (.clk, .rst_n, .a_in, .ctl_in, .g_in, .a_out, .ctl_out, .g_out,
             .res, .res_valid, .res_tag);

  logic [7:0] exp_sum;
  logic [3:0] exp_tag;
  logic       expect_res;

  initial begin
    a_in = 0; g_in = 0; ctl_in = '0; expect_res = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic int len = $urandom_range(1, 32);
      automatic logic [7:0] s = 0;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        // check result of the previous tile (valid in this cycle)
        if (expect_res) begin
          checks++;
          if (!res_valid || res !== exp_sum || res_tag !== exp_tag) failures++;
          expect_res = 0;
        end else begin
          checks++;
          if (res_valid) failures++;
        end
        a_in = 8'($urandom); g_in = 2'($urandom);
        ctl_in.valid = 1; ctl_in.first = (k == 0); ctl_in.last = (k == len - 1);
        ctl_in.tag = 4'(t);
        s ^= gf_mul_ref(a_in, 8'(g_in));
        if (k == len - 1) begin exp_sum = s; exp_tag = 4'(t); end
        @(posedge clk); #1;
        checks++;
        if (a_out !== a_in || g_out !== g_in || ctl_out !== ctl_in) failures++;
        if (k == len - 1) expect_res = 1;
      end
      // optional idle gap
      if ($urandom_range(1) == 1) begin
        @(negedge clk);
        if (expect_res) begin
          checks++;
          if (!res_valid || res !== exp_sum || res_tag !== exp_tag) failures++;
          expect_res = 0;
        end
        ctl_in = '0; a_in = 8'($urandom);
        @(posedge clk);
      end
    end
    @(negedge clk);
    if (expect_res) begin
      checks++;
      if (!res_valid || res !== exp_sum) failures++;
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
