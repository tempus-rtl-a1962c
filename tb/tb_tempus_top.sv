// tb_tempus_top: end-to-end test of the whole engine at reduced sizes.
//
// Three runs in parallel, each a complete GEMM checked element by element
// (see tempus_harness):
//  * the 2x2 example configuration: 32x16x32 INT16, DIM 8, SPLIT 2,
//    CASC_LN 2, one packet-switched B port per split, GRAPH_ITER_CNT 8 and
//    replication factor 2;
//  * a rectangular 16x32x48 product on a 2x4 block with two B ports per
//    split and random memory back-pressure;
//  * the same 2x2 example with INT32 operands (64-bit accumulation).
// Ends with TB_RESULT; a watchdog fails the test if any run hangs.
module tb_tempus_top;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  int unsigned c0, f0, c1, f1, c2, f2;
  bit d0, d1, d2;

  tempus_harness #(.GEMM_A(32), .GEMM_AB(16), .GEMM_B(32), .DIM(8), .SPLIT(2),
                   .CASC_LN(2), .B_PORTS(1), .STALL(0), .REQUIRE_ALL(1))
    u_ex (.clk, .rst_n, .checks(c0), .failures(f0), .finished(d0));
  tempus_harness #(.GEMM_A(16), .GEMM_AB(32), .GEMM_B(48), .DIM(8), .SPLIT(2),
                   .CASC_LN(4), .B_PORTS(2), .STALL(20), .REQUIRE_ALL(1))
    u_rect (.clk, .rst_n, .checks(c1), .failures(f1), .finished(d1));
  tempus_harness #(.GEMM_A(32), .GEMM_AB(16), .GEMM_B(32), .DIM(8), .SPLIT(2),
                   .CASC_LN(2), .B_PORTS(2), .DATA_W(32), .STALL(0), .REQUIRE_ALL(0))
    u_i32 (.clk, .rst_n, .checks(c2), .failures(f2), .finished(d2));

  initial begin
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    wait (d0 && d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    $display("watchdog: run did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + 1, f0 + f1 + f2 + 1);
    $finish;
  end
endmodule
