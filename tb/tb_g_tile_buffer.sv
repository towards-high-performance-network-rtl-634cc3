// tb_g_tile_buffer -- writes random generator rows (16 two-bit coefficients)
// into all 32 rows and reads every row of both column tiles back, checking
// that tile n, coefficient j is coefficient n*8+j of the row written.
module tb_g_tile_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  logic        wr_en, rd_tile;
  logic [4:0]  wr_row, rd_row;
  logic [31:0] wr_data;
  logic [1:0]  g_row [8];
  logic [31:0] shadow [32];
  int checks = 0, failures = 0;

  g_tile_buffer dut (.clk, .wr_en, .wr_row, .wr_data, .rd_tile, .rd_row, .g_row);

  initial begin
    wr_en = 0; rd_tile = 0; rd_row = 0; wr_row = 0; wr_data = 0;
    for (int pass = 0; pass < 3; pass++) begin
      for (int k = 0; k < 32; k++) begin
        @(negedge clk);
        wr_en = 1; wr_row = 5'(k); wr_data = $urandom; shadow[k] = wr_data;
      end
      @(negedge clk) wr_en = 0;
      for (int k = 0; k < 32; k++)
        for (int n = 0; n < 2; n++) begin
          @(negedge clk) rd_tile = 1'(n); rd_row = 5'(k);
          #1;
          for (int j = 0; j < 8; j++) begin
            checks++;
            if (g_row[j] !== shadow[k][(n*8 + j)*2 +: 2]) failures++;
          end
        end
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
