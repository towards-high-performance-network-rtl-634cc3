// tb_bats_accel_exps -- the scaling experiments as workloads: the
// accelerator is built in the configurations that differ from the default
// only in the number of compute units, read adapters and write ports, and
// each encodes 32 batches (the job size of the measurements) with
// load-balanced scheduling, all side by side:
//   B: 8 CUs, 1 read adapter     C: 8 CUs, 2 read adapters
//   D: 8 CUs, 4 read adapters    G: 4 CUs, 4 read adapters
//   H: 2 CUs, 2 read adapters    I: 1 CU,  1 read adapter
//   J: 8 CUs, 8 read adapters, 2 write ports
// The default configuration and the run without load balancing are in
// tb_bats_accel.  Each run checks every coded element and reports its
// cycle count and throughput at 300 MHz; the configurations with bundled
// read ports must show read-adapter contention.
module tb_bats_accel_exps;
  logic clk = 0, rst_n = 0, go = 0;
  always #5 clk = ~clk;

  localparam int NE = 7;
  logic fin [NE];
  int   chk [NE], bad [NE], cyc [NE], rdc [NE];
  string names [NE] = '{"B 8 CU/1 AXI/1 OUT", "C 8 CU/2 AXI/1 OUT", "D 8 CU/4 AXI/1 OUT",
                        "G 4 CU/4 AXI/1 OUT", "H 2 CU/2 AXI/1 OUT", "I 1 CU/1 AXI/1 OUT",
                        "J 8 CU/8 AXI/2 OUT"};

  accel_exp_run #(.NCU(8), .NAXI(1), .NOUT(1)) u_b (.clk, .rst_n, .go, .fin(fin[0]), .checks(chk[0]), .failures(bad[0]), .cycles(cyc[0]), .rd_contend(rdc[0]));
  accel_exp_run #(.NCU(8), .NAXI(2), .NOUT(1)) u_c (.clk, .rst_n, .go, .fin(fin[1]), .checks(chk[1]), .failures(bad[1]), .cycles(cyc[1]), .rd_contend(rdc[1]));
  accel_exp_run #(.NCU(8), .NAXI(4), .NOUT(1)) u_d (.clk, .rst_n, .go, .fin(fin[2]), .checks(chk[2]), .failures(bad[2]), .cycles(cyc[2]), .rd_contend(rdc[2]));
  accel_exp_run #(.NCU(4), .NAXI(4), .NOUT(1)) u_g (.clk, .rst_n, .go, .fin(fin[3]), .checks(chk[3]), .failures(bad[3]), .cycles(cyc[3]), .rd_contend(rdc[3]));
  accel_exp_run #(.NCU(2), .NAXI(2), .NOUT(1)) u_h (.clk, .rst_n, .go, .fin(fin[4]), .checks(chk[4]), .failures(bad[4]), .cycles(cyc[4]), .rd_contend(rdc[4]));
  accel_exp_run #(.NCU(1), .NAXI(1), .NOUT(1)) u_i (.clk, .rst_n, .go, .fin(fin[5]), .checks(chk[5]), .failures(bad[5]), .cycles(cyc[5]), .rd_contend(rdc[5]));
  accel_exp_run #(.NCU(8), .NAXI(8), .NOUT(2)) u_j (.clk, .rst_n, .go, .fin(fin[6]), .checks(chk[6]), .failures(bad[6]), .cycles(cyc[6]), .rd_contend(rdc[6]));

  int checks = 0, failures = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    go = 1;
    for (int e = 0; e < NE; e++) wait (fin[e]);
    for (int e = 0; e < NE; e++) begin
      $display("Exp %s: %0d cycles, %.1f Gb/s at 300 MHz, read contention %0d, %0d/%0d checks failed",
               names[e], cyc[e], 32.0 * 256.0 * 16.0 * 8.0 * 0.3 / real'(cyc[e]), rdc[e], bad[e], chk[e]);
      checks += chk[e];
      failures += bad[e];
    end
    // bundled read ports (B, C, D) must contend
    for (int e = 0; e < 3; e++) begin
      checks++;
      if (rdc[e] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
