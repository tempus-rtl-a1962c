// tb_tempus_full: one complete GEMM on tempus_top with every parameter at
// its default: 1024 x 1024 x 1024 INT16 on SPLIT 2 x CASC_LN 8 kernels of
// 64 x 128 x 64 tiles, one B stream per kernel, 128 graph iterations.
//
// The row-major A and B (random INT16), the three stream images and the
// row-major result share one external-memory model. After start the test
// waits for done, then checks every element of the first and last row and
// column of C and NSAMPLE random elements against sum_k A[m][k]*B[k][n]
// (modulo 2^32), the iteration count of each split (Eq. 1: 128), exactly one
// 4x4x4 step per clock in every kernel (16*16*32 steps per iteration), the
// packet-error flag, and the compute-phase length against the data
// movement bound (the B image is read at one 128-bit word per clock).
module tb_tempus_full;
  localparam int unsigned GEMM_A = 1024, GEMM_AB = 1024, GEMM_B = 1024, DIM = 64;
  localparam int unsigned SPLIT = 2, CASC_LN = 8, B_PORTS = 8, DATA_W = 16;
  localparam int unsigned NSAMPLE = 4096;
  localparam int unsigned MAX_CYC = 20_000_000;
  int unsigned checks, failures;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  import tempus_pkg::*;

  localparam int unsigned ACC_W  = 2 * DATA_W;
  localparam int unsigned WRD_LN = 128 / DATA_W;
  localparam int unsigned EPW_C  = 128 / ACC_W;
  localparam int unsigned DIM_AB = GEMM_AB / CASC_LN;
  localparam int unsigned ITERS  = GEMM_A * GEMM_B / (DIM * DIM * SPLIT);
  localparam int unsigned NB     = SPLIT * B_PORTS;
  localparam int unsigned ND     = CASC_LN / B_PORTS;
  localparam int unsigned A_SRC  = 0;
  localparam int unsigned B_SRC  = A_SRC + GEMM_A * GEMM_AB / WRD_LN;
  localparam int unsigned A_IMG  = B_SRC + GEMM_AB * GEMM_B / WRD_LN;
  localparam int unsigned B_IMG  = A_IMG + CASC_LN * ITERS * DIM * DIM_AB / WRD_LN;
  localparam int unsigned C_IMG  = B_IMG + NB * ITERS * ND * (1 + DIM_AB * DIM / WRD_LN);
  localparam int unsigned C_DST  = C_IMG + GEMM_A * GEMM_B / EPW_C;
  localparam int unsigned WORDS  = C_DST + GEMM_A * GEMM_B / EPW_C;
  localparam int unsigned STEPS  = (DIM / 4) * (DIM / 4) * (DIM_AB / 4);  // per iteration

  // ------------------------------------------------------------ DUT + memory
  logic          start, busy, done, pkt_err;
  phase_e        phase;
  logic [31:0]   iter_cnt [SPLIT];
  logic [31:0]   compute_cycles;

  logic          arvalid [4], arready [4], rvalid [4], rready [4], rlast [4];
  logic [31:0]   araddr [4];
  logic [7:0]    arlen  [4];
  logic [127:0]  rdata  [4];
  logic          awvalid [2], awready [2], wvalid [2], wready [2], wlast [2];
  logic          bvalid [2], bready [2];
  logic [31:0]   awaddr [2];
  logic [7:0]    awlen  [2];
  logic [127:0]  wdata  [2];
  int unsigned   oob;

  // read port 3 is unused
  assign arvalid[3] = 1'b0; assign araddr[3] = '0; assign arlen[3] = '0;
  assign rready[3]  = 1'b0;

  tempus_top u_top (
    .clk, .rst_n, .start,
    .a_src(A_SRC), .b_src(B_SRC), .a_img(A_IMG), .b_img(B_IMG),
    .c_img(C_IMG), .c_dst(C_DST),
    .busy, .done, .phase, .pkt_err, .iter_cnt, .compute_cycles,
    .tl_arvalid(arvalid[0]), .tl_arready(arready[0]), .tl_araddr(araddr[0]), .tl_arlen(arlen[0]),
    .tl_rvalid(rvalid[0]), .tl_rready(rready[0]), .tl_rdata(rdata[0]), .tl_rlast(rlast[0]),
    .tl_awvalid(awvalid[0]), .tl_awready(awready[0]), .tl_awaddr(awaddr[0]), .tl_awlen(awlen[0]),
    .tl_wvalid(wvalid[0]), .tl_wready(wready[0]), .tl_wdata(wdata[0]), .tl_wlast(wlast[0]),
    .tl_bvalid(bvalid[0]), .tl_bready(bready[0]),
    .da_arvalid(arvalid[1]), .da_arready(arready[1]), .da_araddr(araddr[1]), .da_arlen(arlen[1]),
    .da_rvalid(rvalid[1]), .da_rready(rready[1]), .da_rdata(rdata[1]), .da_rlast(rlast[1]),
    .db_arvalid(arvalid[2]), .db_arready(arready[2]), .db_araddr(araddr[2]), .db_arlen(arlen[2]),
    .db_rvalid(rvalid[2]), .db_rready(rready[2]), .db_rdata(rdata[2]), .db_rlast(rlast[2]),
    .dc_awvalid(awvalid[1]), .dc_awready(awready[1]), .dc_awaddr(awaddr[1]), .dc_awlen(awlen[1]),
    .dc_wvalid(wvalid[1]), .dc_wready(wready[1]), .dc_wdata(wdata[1]), .dc_wlast(wlast[1]),
    .dc_bvalid(bvalid[1]), .dc_bready(bready[1])
  );

  axi_mem_model #(.NR(4), .NW(2), .WORDS(WORDS), .STALL(0)) u_mem (
    .clk, .rst_n,
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast,
    .bvalid, .bready, .oob_cnt(oob)
  );

  // ------------------------------------------------------------ step counters
  int unsigned issues [SPLIT][CASC_LN];
  for (genvar s = 0; s < SPLIT; s++) begin : g_ps
    for (genvar k = 0; k < CASC_LN; k++) begin : g_pk
      always @(posedge clk)
        if (rst_n && u_top.u_array.g_split[s].u_graph.g_kernel[k].u_core.issue) issues[s][k]++;
    end
  end

  // ------------------------------------------------------------ stimulus and check
  logic signed [DATA_W-1:0] a_m [GEMM_A][GEMM_AB];
  logic signed [DATA_W-1:0] b_m [GEMM_AB][GEMM_B];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 40) $display("FAIL [%0dx%0dx%0d]: %s", GEMM_A, GEMM_AB, GEMM_B, what);
    end
  endtask

  initial begin
    int unsigned cyc, bound, ldw;
    logic [ACC_W-1:0] ref_c, got;
    checks = 0; failures = 0; start = 0;
    for (int s = 0; s < SPLIT; s++) for (int k = 0; k < CASC_LN; k++) issues[s][k] = 0;
    for (int i = 0; i < WORDS; i++) u_mem.mem[i] = '0;
    for (int m = 0; m < GEMM_A; m++)
      for (int k = 0; k < GEMM_AB; k++) begin
        a_m[m][k] = DATA_W'($urandom);
        u_mem.mem[A_SRC + (m*GEMM_AB + k) / WRD_LN][((m*GEMM_AB + k) % WRD_LN)*DATA_W +: DATA_W] = a_m[m][k];
      end
    for (int k = 0; k < GEMM_AB; k++)
      for (int n = 0; n < GEMM_B; n++) begin
        b_m[k][n] = DATA_W'($urandom);
        u_mem.mem[B_SRC + (k*GEMM_B + n) / WRD_LN][((k*GEMM_B + n) % WRD_LN)*DATA_W +: DATA_W] = b_m[k][n];
      end
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    chk(done, "run did not finish");
    repeat (4) @(posedge clk);
    // result: every element of the first and last row and column, plus
    // NSAMPLE random elements (the full product would take as long as the run)
    for (int i = 0; i < NSAMPLE + 4 * GEMM_B; i++) begin
      int m, n;
      if (i < GEMM_B)          begin m = 0;          n = i; end
      else if (i < 2 * GEMM_B) begin m = GEMM_A - 1; n = i - GEMM_B; end
      else if (i < 3 * GEMM_B) begin m = i - 2 * GEMM_B; n = 0; end
      else if (i < 4 * GEMM_B) begin m = i - 3 * GEMM_B; n = GEMM_B - 1; end
      else begin m = $urandom % GEMM_A; n = $urandom % GEMM_B; end
      ref_c = '0;
      for (int k = 0; k < GEMM_AB; k++)
        ref_c += ACC_W'($signed(a_m[m][k]) * $signed(b_m[k][n]));
      got = u_mem.mem[C_DST + (m*GEMM_B + n) / EPW_C][((m*GEMM_B + n) % EPW_C)*ACC_W +: ACC_W];
      chk(got == ref_c, $sformatf("C[%0d][%0d] = %0h, expected %0h", m, n, got, ref_c));
    end
    // iteration count (Eq. 1) and one clock per 4x4x4 step
    for (int s = 0; s < SPLIT; s++) begin
      chk(iter_cnt[s] == ITERS, $sformatf("split %0d ran %0d iterations, expected %0d",
                                          s, iter_cnt[s], ITERS));
      for (int k = 0; k < CASC_LN; k++)
        chk(issues[s][k] == ITERS * STEPS,
            $sformatf("kernel %0d.%0d made %0d multiply steps, expected %0d",
                      s, k, issues[s][k], ITERS * STEPS));
    end
    chk(!pkt_err, "packet switch saw a malformed header");
    chk(oob == 0, "write outside memory");
    // compute phase length: bounded by the larger of the kernel work and the
    // B stream volume (one 128-bit word per clock), plus pipeline fill
    ldw   = NB * ND * (1 + DIM_AB * DIM / WRD_LN);
    bound = ITERS * ((STEPS > ldw) ? STEPS : ldw);
    chk(compute_cycles <= bound + bound / 4 + 64 * DIM,
          $sformatf("compute took %0d clocks, bound %0d", compute_cycles, bound));
    $display("  [%0dx%0dx%0d DIM=%0d %0dx%0d B_PORTS=%0d stall=%0d%%] iterations=%0d compute_cycles=%0d (bound %0d) total_cycles=%0d",
             GEMM_A, GEMM_AB, GEMM_B, DIM, SPLIT, CASC_LN, B_PORTS, 0, ITERS,
             compute_cycles, bound, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAX_CYC) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
