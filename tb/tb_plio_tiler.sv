// tb_plio_tiler: unit test of the tiling / de-tiling engine.
//
// Small geometry: A and B are 32x32 INT16, tiles 8 (rows) x 16 (reduction)
// and 16 x 8, SPLIT = 2, CASC_LN = 2, one B stream per split (two packets
// per stream and iteration), so RF_A = RF_B = 2 and there are 8 graph
// iterations. Three passes run back to back on one memory model:
//   TL_A      - the A stream image is compared word by word with an image
//               built here from the row-major matrix;
//   TL_B      - the same for the B image, packet headers included;
//   TL_DETILE - a random C stream image is turned into a row-major matrix,
//               compared element by element.
// The expected images are computed from the stream formats directly
// (iteration order, tile replication, 4x4 row-major subtiles, word w of an
// image on stream w mod streams), not from the engine's own loop nest. Each
// pass must also write exactly its image size, and nothing outside it.
module tb_plio_tiler;
  import tempus_pkg::*;
  localparam int M = 32, K = 32, N = 32, DA = 8, DK = 16, DB = 8, SP = 2, CL = 2, BP = 1;
  localparam int DW = 16, AW = 32, WL = 128 / DW, EPC = 128 / AW;
  localparam int RF_A = N / (DB * SP), RF_B = M / (DA * SP), ITERS = M * N / (DA * DB * SP);
  localparam int NB = SP * BP, ND = CL / BP;
  localparam int TA = DA * DK / WL, TB = DK * DB / WL, TC = DA * DB / EPC;
  localparam int CSUB = (DA / 4) * (DB / 4), CWPS = 16 / EPC;
  localparam int A_SRC = 0, B_SRC = 256, A_IMG = 512, B_IMG = 1024, C_IMG = 2048, C_DST = 2560;
  localparam int A_WORDS = CL * ITERS * TA, B_WORDS = NB * ITERS * ND * (1 + TB);
  localparam int C_WORDS = SP * ITERS * TC, MEMW = 4096;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic start, busy, done;
  tl_mode_e mode;
  logic [31:0] src_base, dst_base;
  logic         arvalid [1];
  logic         arready [1];
  logic [31:0]  araddr  [1];
  logic [7:0]   arlen   [1];
  logic         rvalid  [1];
  logic         rready  [1];
  logic [127:0] rdata   [1];
  logic         rlast   [1];
  logic         awvalid [1];
  logic         awready [1];
  logic [31:0]  awaddr  [1];
  logic [7:0]   awlen   [1];
  logic         wvalid  [1];
  logic         wready  [1];
  logic [127:0] wdata   [1];
  logic         wlast   [1];
  logic         bvalid  [1];
  logic         bready  [1];
  int unsigned  oob;

  plio_tiler #(.GEMM_A(M), .GEMM_AB(K), .GEMM_B(N), .DIM_A(DA), .DIM_AB(DK), .DIM_B(DB),
               .SPLIT(SP), .CASC_LN(CL), .B_PORTS(BP), .DATA_W(DW)) dut (
    .clk, .rst_n, .start, .mode, .src_base, .dst_base, .busy, .done,
    .arvalid(arvalid[0]), .arready(arready[0]), .araddr(araddr[0]), .arlen(arlen[0]),
    .rvalid(rvalid[0]), .rready(rready[0]), .rdata(rdata[0]), .rlast(rlast[0]),
    .awvalid(awvalid[0]), .awready(awready[0]), .awaddr(awaddr[0]), .awlen(awlen[0]),
    .wvalid(wvalid[0]), .wready(wready[0]), .wdata(wdata[0]), .wlast(wlast[0]),
    .bvalid(bvalid[0]), .bready(bready[0])
  );
  axi_mem_model #(.NR(1), .NW(1), .WORDS(MEMW), .STALL(15)) u_mem (
    .clk, .rst_n, .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready,
    .oob_cnt(oob)
  );

  int checks = 0, failures = 0, writes = 0, wlo, whi, outside = 0;
  logic [DW-1:0] am [M][K];
  logic [DW-1:0] bm [K][N];
  logic [127:0]  cimg [C_WORDS];

  task automatic fail(string m);
    failures++;
    if (failures < 12) $display("FAIL %s", m);
  endtask

  always @(posedge clk)
    if (rst_n && wvalid[0] && wready[0]) writes++;
  always @(posedge clk)
    if (rst_n && awvalid[0] && awready[0] && (awaddr[0] < wlo || awaddr[0] >= whi)) outside++;

  function automatic int rt_of(int n);
    return (n / (RF_A * RF_B)) * RF_B + n % RF_B;
  endfunction
  function automatic int ct_of(int n, int s);
    return s * RF_A + (n / RF_B) % RF_A;
  endfunction
  function automatic int el_r(int u, int e, int cols);
    int g = u * WL + e;
    return ((g / 16) / (cols / 4)) * 4 + (g % 16) / 4;
  endfunction
  function automatic int el_c(int u, int e, int cols);
    int g = u * WL + e;
    return ((g / 16) % (cols / 4)) * 4 + g % 4;
  endfunction

  task automatic run_pass(tl_mode_e md, int src, int dst, int words);
    int w0;
    mode <= md; src_base <= 32'(src); dst_base <= 32'(dst);
    wlo = dst; whi = dst + words; w0 = writes;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    wait (done);
    @(posedge clk);
    checks++;
    if (writes - w0 != words) fail($sformatf("pass %s wrote %0d words, expected %0d", md.name(), writes - w0, words));
  endtask

  initial begin
    start = 0; mode = TL_A; src_base = '0; dst_base = '0; wlo = 0; whi = MEMW;
    foreach (am[r, c]) am[r][c] = DW'($urandom);
    foreach (bm[r, c]) bm[r][c] = DW'($urandom);
    foreach (cimg[i]) cimg[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < MEMW; i++) u_mem.mem[i] = '0;
    for (int r = 0; r < M; r++) for (int c = 0; c < K; c++)
      u_mem.mem[A_SRC + (r * K + c) / WL][((r * K + c) % WL) * DW +: DW] = am[r][c];
    for (int r = 0; r < K; r++) for (int c = 0; c < N; c++)
      u_mem.mem[B_SRC + (r * N + c) / WL][((r * N + c) % WL) * DW +: DW] = bm[r][c];
    for (int i = 0; i < C_WORDS; i++) u_mem.mem[C_IMG + i] = cimg[i];

    // ---- A image
    run_pass(TL_A, A_SRC, A_IMG, A_WORDS);
    for (int n = 0; n < ITERS; n++)
      for (int c = 0; c < CL; c++)
        for (int u = 0; u < TA; u++) begin
          logic [127:0] exp_w;
          for (int e = 0; e < WL; e++)
            exp_w[e*DW +: DW] = am[rt_of(n) * DA + el_r(u, e, DK)][c * DK + el_c(u, e, DK)];
          checks++;
          if (u_mem.mem[A_IMG + (n * TA + u) * CL + c] !== exp_w)
            fail($sformatf("A image: iteration %0d stream %0d word %0d", n, c, u));
        end

    // ---- B image
    run_pass(TL_B, B_SRC, B_IMG, B_WORDS);
    for (int n = 0; n < ITERS; n++)
      for (int s = 0; s < SP; s++)
        for (int q = 0; q < BP; q++)
          for (int d = 0; d < ND; d++) begin
            int x0, p, kc;
            p  = s * BP + q;
            kc = q * ND + d;
            x0 = (n * ND + d) * (1 + TB);
            checks++;
            if (u_mem.mem[B_IMG + x0 * NB + p] !== pkt_header(8'(d)))
              fail($sformatf("B image: header iteration %0d stream %0d packet %0d", n, p, d));
            for (int u = 0; u < TB; u++) begin
              logic [127:0] exp_w;
              for (int e = 0; e < WL; e++)
                exp_w[e*DW +: DW] = bm[kc * DK + el_r(u, e, DB)][ct_of(n, s) * DB + el_c(u, e, DB)];
              checks++;
              if (u_mem.mem[B_IMG + (x0 + 1 + u) * NB + p] !== exp_w)
                fail($sformatf("B image: iteration %0d stream %0d packet %0d word %0d", n, p, d, u));
            end
          end

    // ---- de-tiling of C
    run_pass(TL_DETILE, C_IMG, C_DST, M * N / EPC);
    for (int w = 0; w < C_WORDS; w++)
      for (int l = 0; l < EPC; l++) begin
        int s, x, n, sub, wi, lane, r, c;
        s = w % SP; x = w / SP;
        n = x / (CSUB * CWPS); sub = (x / CWPS) % CSUB; wi = x % CWPS;
        lane = wi * EPC + l;
        r = rt_of(n) * DA + (sub / (DB / 4)) * 4 + lane / 4;
        c = ct_of(n, s) * DB + (sub % (DB / 4)) * 4 + lane % 4;
        checks++;
        if (u_mem.mem[C_DST + (r * N + c) / EPC][((r * N + c) % EPC) * AW +: AW] !== cimg[w][l*AW +: AW])
          fail($sformatf("C[%0d][%0d] wrong", r, c));
      end

    checks++;
    if (outside != 0 || oob != 0) fail($sformatf("%0d writes outside the destination", outside));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
