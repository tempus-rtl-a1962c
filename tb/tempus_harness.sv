// tempus_harness: runs one complete GEMM on tempus_top at a chosen size and
// checks it against a reference product computed here.
//
// It places the row-major sources, the three stream images and the result in
// one external-memory model, fills A and B with random DATA_W-bit values,
// pulses start, waits for done, and compares every element of the row-major
// result with sum_k A[m][k]*B[k][n] taken modulo 2^ACC_W. It also checks
// the graph-iteration count of every split against
// GEMM_A*GEMM_B/(DIM*DIM*SPLIT), that each kernel spent exactly one clock
// per 4x4x4 step (II = 1), that no packet was malformed and that the
// compute phase was not slower than the data movement bound allows.
//
// Mechanisms counted (reported, and a failure when REQUIRE_ALL is set and
// one never happened): B packets steered to a kernel other than the first
// of a packet switch, A words held by the broadcast because one split was
// not ready, a kernel stalled on its cascade handshake, a kernel loading the
// next tiles while multiplying the current ones, a DMA read held because its
// stream FIFO was full.
module tempus_harness #(
  parameter int unsigned GEMM_A   = 32,
  parameter int unsigned GEMM_AB  = 16,
  parameter int unsigned GEMM_B   = 32,
  parameter int unsigned DIM      = 8,
  parameter int unsigned SPLIT    = 2,
  parameter int unsigned CASC_LN  = 2,
  parameter int unsigned B_PORTS  = 1,
  parameter int unsigned DATA_W   = 16,
  parameter int unsigned STALL    = 0,
  parameter bit          REQUIRE_ALL = 1'b1,
  parameter int unsigned MAX_CYC  = 2_000_000
) (
  input  logic        clk,
  input  logic        rst_n,
  output int unsigned checks,
  output int unsigned failures,
  output bit          finished
);
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

  tempus_top #(
    .GEMM_A(GEMM_A), .GEMM_AB(GEMM_AB), .GEMM_B(GEMM_B), .DIM(DIM),
    .SPLIT(SPLIT), .CASC_LN(CASC_LN), .B_PORTS(B_PORTS), .DATA_W(DATA_W)
  ) u_top (
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

  axi_mem_model #(.NR(4), .NW(2), .WORDS(WORDS), .STALL(STALL)) u_mem (
    .clk, .rst_n,
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast,
    .bvalid, .bready, .oob_cnt(oob)
  );

  // ------------------------------------------------------------ mechanism counters
  int unsigned n_pkt_route, n_bcast_hold, n_casc_stall, n_overlap, n_fifo_full;
  int unsigned issues [SPLIT][CASC_LN];

  for (genvar s = 0; s < SPLIT; s++) begin : g_ps
    for (genvar q = 0; q < B_PORTS; q++) begin : g_pq
      always @(posedge clk)
        if (rst_n && u_top.u_array.g_bs[s].g_bq[q].u_psw.in_valid &&
            u_top.u_array.g_bs[s].g_bq[q].u_psw.in_ready &&
            !u_top.u_array.g_bs[s].g_bq[q].u_psw.body &&
            u_top.u_array.g_bs[s].g_bq[q].u_psw.in_data[7:0] != 0)
          n_pkt_route++;
    end
    for (genvar k = 0; k < CASC_LN; k++) begin : g_pk
      always @(posedge clk) if (rst_n) begin
        if (u_top.u_array.g_split[s].u_graph.g_kernel[k].u_core.v1 &&
            !u_top.u_array.g_split[s].u_graph.g_kernel[k].u_core.en)
          n_casc_stall++;
        if (u_top.u_array.g_split[s].u_graph.g_kernel[k].u_core.issue) begin
          issues[s][k]++;
          if ((u_top.u_array.g_split[s].u_graph.g_kernel[k].u_core.a_valid &&
               u_top.u_array.g_split[s].u_graph.g_kernel[k].u_core.a_ready) ||
              (u_top.u_array.g_split[s].u_graph.g_kernel[k].u_core.b_valid &&
               u_top.u_array.g_split[s].u_graph.g_kernel[k].u_core.b_ready))
            n_overlap++;
        end
      end
    end
  end
  for (genvar k = 0; k < CASC_LN; k++) begin : g_bc
    always @(posedge clk)
      if (rst_n && u_top.u_array.g_a[k].u_bcast.in_valid &&
          !u_top.u_array.g_a[k].u_bcast.in_ready &&
          u_top.u_array.g_a[k].u_bcast.acc != 0)
        n_bcast_hold++;
  end
  always @(posedge clk)
    if (rst_n && ((rvalid[1] && !rready[1] && u_top.u_dma.run_a) ||
                  (rvalid[2] && !rready[2] && u_top.u_dma.run_b)))
      n_fifo_full++;

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
    checks = 0; failures = 0; finished = 0; start = 0;
    n_pkt_route = 0; n_bcast_hold = 0; n_casc_stall = 0; n_overlap = 0; n_fifo_full = 0;
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
    @(posedge clk iff rst_n);
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cyc = 0;
    while (!done && cyc < MAX_CYC) begin @(posedge clk); cyc++; end
    chk(done, "run did not finish");
    repeat (4) @(posedge clk);
    // result
    for (int m = 0; m < GEMM_A; m++)
      for (int n = 0; n < GEMM_B; n++) begin
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
    // compute phase length: bounded by the largest of the kernel work and the
    // per-iteration volumes of the B image, the A image and the C image (each
    // one 128-bit word per clock on its memory port), plus pipeline fill
    ldw   = NB * ND * (1 + DIM_AB * DIM / WRD_LN);
    if (CASC_LN * DIM * DIM_AB / WRD_LN > ldw) ldw = CASC_LN * DIM * DIM_AB / WRD_LN;
    if (SPLIT * DIM * DIM / EPW_C > ldw) ldw = SPLIT * DIM * DIM / EPW_C;
    bound = ITERS * ((STEPS > ldw) ? STEPS : ldw);
    if (STALL == 0)
      chk(compute_cycles <= bound + bound / 4 + 64 * DIM,
          $sformatf("compute took %0d clocks, bound %0d", compute_cycles, bound));
    $display("  [%0dx%0dx%0d DIM=%0d %0dx%0d B_PORTS=%0d stall=%0d%%] iterations=%0d compute_cycles=%0d (bound %0d) total_cycles=%0d",
             GEMM_A, GEMM_AB, GEMM_B, DIM, SPLIT, CASC_LN, B_PORTS, STALL, ITERS,
             compute_cycles, bound, cyc);
    $display("  mechanisms: pkt_routed=%0d bcast_hold=%0d cascade_stall=%0d load_overlap=%0d fifo_full=%0d",
             n_pkt_route, n_bcast_hold, n_casc_stall, n_overlap, n_fifo_full);
    chk(n_overlap > 0, "tile loading never overlapped computation");
    if (REQUIRE_ALL) begin
      if (ND > 1) chk(n_pkt_route > 0, "no B packet went to a second kernel");
      chk(n_bcast_hold > 0, "A broadcast never held a word for one split");
      chk(n_casc_stall > 0, "no cascade stall happened");
      if (STALL == 0) chk(n_fifo_full > 0, "no DMA read was held by a full FIFO");
    end
    finished = 1;
  end
endmodule
