// tb_b_tile_buffer -- fills both banks with random 64-element columns,
// checks the full flags through a fill/release cycle, and reads every
// (bank, column, row tile) slice back: element i of row tile s of column k
// must be element s*8+i of the column written.
module tb_b_tile_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic         wr_en, wr_bank, fill_done, fill_bank, rd_bank, release_en, release_bank;
  logic [4:0]   wr_col, rd_col;
  logic [2:0]   rd_sub;
  logic [511:0] wr_data;
  logic [7:0]   b_col [8];
  logic [1:0]   full;
  logic [511:0] shadow [2][32];
  int checks = 0, failures = 0;

  b_tile_buffer dut (.clk, .rst_n, .wr_en, .wr_bank, .wr_col, .wr_data, .fill_done, .fill_bank,
                     .rd_bank, .rd_col, .rd_sub, .b_col, .release_en, .release_bank, .full);

  initial begin
    wr_en = 0; fill_done = 0; release_en = 0; rd_bank = 0; rd_col = 0; rd_sub = 0;
    wr_bank = 0; wr_col = 0; wr_data = 0; fill_bank = 0; release_bank = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); checks++; if (full !== 2'b00) failures++;
    for (int pass = 0; pass < 2; pass++) begin
      for (int b = 0; b < 2; b++) begin
        for (int k = 0; k < 32; k++) begin
          @(negedge clk);
          wr_en = 1; wr_bank = 1'(b); wr_col = 5'(k);
          for (int w = 0; w < 16; w++) wr_data[w*32 +: 32] = $urandom;
          shadow[b][k] = wr_data;
          fill_done = (k == 31); fill_bank = 1'(b);
        end
        @(negedge clk); wr_en = 0; fill_done = 0;
        checks++; if (full[b] !== 1'b1) failures++;
      end
      for (int b = 0; b < 2; b++)
        for (int k = 0; k < 32; k++)
          for (int s = 0; s < 8; s++) begin
            @(negedge clk) rd_bank = 1'(b); rd_col = 5'(k); rd_sub = 3'(s);
            #1;
            for (int i = 0; i < 8; i++) begin
              checks++;
              if (b_col[i] !== shadow[b][k][(s*8 + i)*8 +: 8]) failures++;
            end
          end
      for (int b = 0; b < 2; b++) begin
        @(negedge clk) release_en = 1; release_bank = 1'(b);
        @(negedge clk) release_en = 0;
        checks++; if (full[b] !== 1'b0) failures++;
      end
    end
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
