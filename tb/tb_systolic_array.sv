// tb_systolic_array -- streams random B and G tiles of random depth
// (1..32, back to back and with gaps) through the 8x8 array and checks every
// PE's result value, tag and cycle: PE(i,j) must present X[i][j] exactly
// i+j+1 cycles after the last k of its tile was issued.
module tb_systolic_array;
  import bats_pkg::*;
  import tb_ref_pkg::*;

  localparam int TM = 8, TN = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] b_col [TM];
  logic [1:0] g_row [TN];
  pe_ctl_t    ctl;
  logic [7:0] res [TM][TN];
  logic       res_valid [TM][TN];
  logic [3:0] res_tag [TM][TN];
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  systolic_array dut (.clk, .rst_n, .b_col, .g_row, .ctl, .res, .res_valid, .res_tag);

  typedef struct { longint due; logic [7:0] val; logic [3:0] tag; } exp_t;
  exp_t q [TM][TN][$];

  // monitor
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < TM; i++)
      for (int j = 0; j < TN; j++) begin
        if (res_valid[i][j]) begin
          checks++;
          if (q[i][j].size() == 0) failures++;
          else begin
            automatic exp_t e = q[i][j].pop_front();
            if (e.due != cyc || e.val !== res[i][j] || e.tag !== res_tag[i][j]) begin
              failures++;
              if (failures < 5) $display("PE(%0d,%0d) cyc %0d/%0d val %h/%h", i, j, cyc, e.due, res[i][j], e.val);
            end
          end
        end
      end
  end

  initial begin
    logic [7:0] acc [TM][TN];
    ctl = '0;
    foreach (b_col[i]) b_col[i] = 0;
    foreach (g_row[j]) g_row[j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 150; t++) begin
      automatic int len = $urandom_range(1, 32);
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        foreach (b_col[i]) b_col[i] = 8'($urandom);
        foreach (g_row[j]) g_row[j] = 2'($urandom);
        ctl.valid = 1; ctl.first = (k == 0); ctl.last = (k == len - 1); ctl.tag = 4'(t);
        for (int i = 0; i < TM; i++)
          for (int j = 0; j < TN; j++) begin
            automatic logic [7:0] p = gf_mul_ref(b_col[i], 8'(g_row[j]));
            acc[i][j] = (k == 0) ? p : (acc[i][j] ^ p);
          end
        if (k == len - 1)
          for (int i = 0; i < TM; i++)
            for (int j = 0; j < TN; j++)
              q[i][j].push_back('{due: cyc + 1 + i + j, val: acc[i][j], tag: 4'(t)});
      end
      if ($urandom_range(3) == 0) begin
        @(negedge clk);
        ctl = '0;
        foreach (b_col[i]) b_col[i] = 8'($urandom);
      end
    end
    @(negedge clk);
    ctl = '0;
    repeat (20) @(posedge clk);
    for (int i = 0; i < TM; i++)
      for (int j = 0; j < TN; j++) begin
        checks++;
        if (q[i][j].size() != 0) failures++;
      end
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
