// tb_tempus_workloads: complete runs of evaluated workload shapes on the
// fixed 2 x 8 compute block (SPLIT 2, CASC_LN 8, one B stream per kernel),
// each re-elaborated for its matrix size, tile size and data type.
//
// Runs, in parallel, each checked element by element against a reference
// product (see tempus_harness), with the iteration count, one multiply step
// per clock, packet integrity and the compute-phase bound also checked:
//  * 128x128x128 INT16, DIM 64 (cubic scaling point; also a ViT head shape)
//  * 256x256x256 INT32, DIM 64 (cubic scaling point, INT32)
//  * 512x64x512 INT16, DIM 128 (attention score matrix, sequence 512); with a
//    reduction slice of 8 the C image write, not the kernels, sets its pace
// The 8x32x8 head (DIM 4, reduction slice 4) is not run: the kernel needs at
// least two 4x4 subtiles in each A and B tile. The 1024^3 INT16 run at the
// default parameters is tb_tempus_full.
module tb_tempus_workloads;
  localparam int NW = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  int unsigned c [NW];
  int unsigned f [NW];
  bit d [NW];

  tempus_harness #(.GEMM_A(128), .GEMM_AB(128), .GEMM_B(128), .DIM(64), .SPLIT(2), .CASC_LN(8),
                   .B_PORTS(8), .REQUIRE_ALL(0), .MAX_CYC(2_000_000))
    u_c128 (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .finished(d[0]));
  tempus_harness #(.GEMM_A(256), .GEMM_AB(256), .GEMM_B(256), .DIM(64), .SPLIT(2), .CASC_LN(8),
                   .B_PORTS(8), .DATA_W(32), .REQUIRE_ALL(0), .MAX_CYC(2_000_000))
    u_c256i32 (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .finished(d[1]));
  tempus_harness #(.GEMM_A(512), .GEMM_AB(64), .GEMM_B(512), .DIM(128), .SPLIT(2), .CASC_LN(8),
                   .B_PORTS(8), .REQUIRE_ALL(0), .MAX_CYC(2_000_000))
    u_score (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .finished(d[2]));

  function automatic int unsigned sum(input int unsigned v [NW]);
    int unsigned s = 0;
    for (int i = 0; i < NW; i++) s += v[i];
    return s;
  endfunction

  initial begin
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    wait (d[0] && d[1] && d[2]);
    $display("TB_RESULT checks=%0d failures=%0d", sum(c), sum(f));
    $finish;
  end
  initial begin
    repeat (3_000_000) @(posedge clk);
    $display("watchdog: a run did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", sum(c) + 1, sum(f) + 1);
    $finish;
  end
endmodule
