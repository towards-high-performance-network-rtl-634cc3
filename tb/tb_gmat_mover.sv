// tb_gmat_mover -- starts the mover for every base-graph row against a
// one-cycle-latency ROM model whose word w holds a pattern of w, and checks
// that exactly rows 0..dg-1 are written, each with ROM word offset(r)+k, and
// that `done` rises dg+2 clocks after the clock edge that takes `start`.
module tb_gmat_mover;
  import bats_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        start, busy, done, wr_en;
  logic [7:0]  row, rom_addr;
  logic [31:0] rom_data, wr_data;
  logic [4:0]  wr_row;
  int checks = 0, failures = 0;
  int degs [8] = '{11, 12, 14, 14, 19, 20, 27, 32};

  gmat_mover dut (.clk, .rst_n, .start, .row, .busy, .done, .rom_addr, .rom_data,
                  .buf_wr_en(wr_en), .buf_wr_row(wr_row), .buf_wr_data(wr_data));

  always @(posedge clk) rom_data <= {rom_addr, ~rom_addr, rom_addr ^ 8'h5A, 8'hC3};

  initial begin
    int off = 0;
    start = 0; row = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 8; r++) begin
      automatic int nwr = 0, cycles = 0;
      @(negedge clk); start = 1; row = 8'(r);
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin
        if (wr_en) begin
          automatic logic [7:0] w = 8'(off + int'(wr_row));
          checks++;
          if (int'(wr_row) != nwr || wr_data !== {w, ~w, w ^ 8'h5A, 8'hC3}) failures++;
          nwr++;
        end
        @(negedge clk); cycles++;
      end
      checks += 2;
      if (nwr != degs[r]) failures++;
      if (cycles != degs[r] + 3) begin
        failures++;
        $display("row %0d: %0d cycles", r, cycles);
      end
      off += degs[r];
    end
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
