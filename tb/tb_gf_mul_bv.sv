// tb_gf_mul_bv -- exhaustive check of the bounded-value GF(2^8) multiplier
// for S = 2 (the L(2^2) configuration, default parameters), S = 4 and the
// full multiplier S = 8, against a carry-less reference multiplier.
module tb_gf_mul_bv;
  import tb_ref_pkg::*;

  logic [7:0] a;
  logic [1:0] b2;
  logic [3:0] b4;
  logic [7:0] b8;
  logic [7:0] p2, p4, p8;
  int checks = 0, failures = 0;

  gf_mul_bv               dut2 (.a(a), .b(b2), .p(p2));
  gf_mul_bv #(.S(4))      dut4 (.a(a), .b(b4), .p(p4));
  gf_mul_bv #(.S(8))      dut8 (.a(a), .b(b8), .p(p8));

  initial begin
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        a = 8'(i); b8 = 8'(j); b4 = 4'(j); b2 = 2'(j);
        #1;
        checks++;
        if (p8 !== gf_mul_ref(8'(i), 8'(j))) failures++;
        if (j < 16) begin
          checks++;
          if (p4 !== gf_mul_ref(8'(i), 8'(j))) failures++;
        end
        if (j < 4) begin
          checks++;
          if (p2 !== gf_mul_ref(8'(i), 8'(j))) begin
            failures++;
            if (failures < 5) $display("mismatch a=%h b=%h got %h", i, j, p2);
          end
        end
      end
    end
    // spot values: x^7 * x = x^8 = 0x1D
    a = 8'h80; b2 = 2'd2; #1; checks++; if (p2 !== 8'h1D) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
