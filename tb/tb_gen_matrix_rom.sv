// tb_gen_matrix_rom -- reads every word of the generator-matrix ROM and
// checks it against the coefficient table, locating each matrix by walking
// the row degrees {11,12,14,14,19,20,27,32} (149 words of 16 two-bit
// coefficients); also checks the one-cycle read latency.
module tb_gen_matrix_rom;
  import bats_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic [7:0]  addr;
  logic [31:0] data;
  int checks = 0, failures = 0;
  int degs [8] = '{11, 12, 14, 14, 19, 20, 27, 32};

  gen_matrix_rom dut (.clk, .addr, .data);

  initial begin
    int w = 0;
    checks++;
    if (BG_EDGES != 149) failures++;
    for (int r = 0; r < 8; r++)
      for (int k = 0; k < degs[r]; k++) begin
        logic [31:0] e;
        @(negedge clk) addr = 8'(w);
        @(posedge clk) #1;
        for (int j = 0; j < 16; j++) e[2*j +: 2] = gen_coef(r, k, j);
        checks++;
        if (data !== e) begin
          failures++;
          if (failures < 5) $display("word %0d: %h vs %h", w, data, e);
        end
        // value must not change before the next clock edge
        @(negedge clk) addr = 8'(w ^ 1);
        #1; checks++;
        if (data !== e) failures++;
        w++;
      end
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
