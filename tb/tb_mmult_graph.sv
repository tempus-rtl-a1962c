// tb_mmult_graph: unit test of one cascade chain of CASC_LN kernels.
//
// Configuration under test: CASC_LN = 3 kernels, 8x8 INT16 tiles per
// kernel. Each graph iteration sends one random A tile and one random B
// tile to every kernel (its slice of the reduction dimension). The chain's
// C stream must carry C = sum_k A_k * B_k as 4x4 subtiles in row-major
// order, 16 lanes of 32 bits per subtile over four 128-bit words. Inputs
// pause at random between words; the C output stalls at random in the
// second half. The test checks every C element, iter_cnt, and (first half,
// C always ready) that an iteration's C words leave within twice their
// count in clocks once started.
module tb_mmult_graph;
    localparam int SP = 1, CL = 3;
  localparam int DW = 16, AW = 32, DA = 8, DK = 8, DB = 8, WL = 128 / DW;
  localparam int NIT = 6;
  localparam int AWPT = DA * DK / WL, BWPT = DK * DB / WL;
  localparam int CSUB = (DA / 4) * (DB / 4), CWPS = 16 * AW / 128;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic         a_valid [CL];
  logic         a_ready [CL];
  logic [127:0] a_data  [CL];
  logic         b_valid [CL];
  logic         b_ready [CL];
  logic [127:0] b_data  [CL];
  logic         c_valid_s, c_ready_s;
  logic [127:0] c_data_s;
  logic [31:0]  iter_cnt_s;
  logic         c_valid [SP];
  logic         c_ready [SP];
  logic [127:0] c_data  [SP];
  logic [31:0]  iter_cnt [SP];
  assign c_valid[0] = c_valid_s;
  assign c_data[0]  = c_data_s;
  assign c_ready_s  = c_ready[0];
  assign iter_cnt[0] = iter_cnt_s;

  mmult_graph #(.CASC_LN(CL), .DATA_W(DW), .DIM_A(DA), .DIM_AB(DK), .DIM_B(DB)) dut (
    .clk, .rst_n, .a_valid, .a_ready, .a_data, .b_valid, .b_ready, .b_data,
    .c_valid(c_valid_s), .c_ready(c_ready_s), .c_data(c_data_s), .iter_cnt(iter_cnt_s));

  int checks = 0, failures = 0, cyc = 0, half = 0;
  logic signed [DW-1:0] am [NIT][CL][DA][DK];
  logic signed [DW-1:0] bm [NIT][SP][CL][DK][DB];

  task automatic fail(string m);
    failures++;
    if (failures < 10) $display("FAIL %s", m);
  endtask

  // word u of a tile with `cols` columns: element positions (subtiles and
  // their elements both row-major)
  function automatic int el_r(int u, int e, int cols);
    int g = u * WL + e;
    return ((g / 16) / (cols / 4)) * 4 + (g % 16) / 4;
  endfunction
  function automatic int el_c(int u, int e, int cols);
    int g = u * WL + e;
    return ((g / 16) % (cols / 4)) * 4 + g % 4;
  endfunction

  // stream images
  logic [127:0] aimg [CL][NIT*AWPT];
  logic [127:0] bimg [CL][NIT*BWPT];
  int ai [CL];
  int bi [CL];
  int co [SP];
  int c_first [SP];
  int c_last [SP];

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      for (int k = 0; k < CL; k++) begin
        int n;
        n = ai[k] + ((a_valid[k] && a_ready[k]) ? 1 : 0);
        ai[k] = n;
        a_valid[k] <= (n < NIT * AWPT) && ((a_valid[k] && !a_ready[k]) || $urandom % 5 != 0);
        a_data[k]  <= aimg[k][n < NIT * AWPT ? n : 0];
      end
      for (int p = 0; p < CL; p++) begin
        int n;
        n = bi[p] + ((b_valid[p] && b_ready[p]) ? 1 : 0);
        bi[p] = n;
        b_valid[p] <= (n < NIT * BWPT) && ((b_valid[p] && !b_ready[p]) || $urandom % 5 != 0);
        b_data[p]  <= bimg[p][n < NIT * BWPT ? n : 0];
      end
      for (int s = 0; s < SP; s++) begin
        if (c_valid[s] && c_ready[s]) check_c(s);
        c_ready[s] <= (half == 0) || ($urandom % 3 != 0);
      end
    end
  end

  // C word co[s] of split s
  task automatic check_c(int s);
    int it, sub, w, sr, sc;
    it  = co[s] / (CSUB * CWPS);
    sub = (co[s] / CWPS) % CSUB;
    w   = co[s] % CWPS;
    sr  = sub / (DB / 4);
    sc  = sub % (DB / 4);
    if (it >= NIT) begin fail("extra C word"); return; end
    for (int l = 0; l < 4; l++) begin
      int lane, r, c;
      logic [AW-1:0] ref_v;
      lane = w * 4 + l;
      r = sr * 4 + lane / 4;
      c = sc * 4 + lane % 4;
      ref_v = '0;
      for (int k = 0; k < CL; k++)
        for (int kk = 0; kk < DK; kk++)
          ref_v += AW'(longint'(am[it][k][r][kk]) * longint'(bm[it][s][k][kk][c]));
      checks++;
      if (c_data[s][l*AW +: AW] !== ref_v)
        fail($sformatf("split %0d it %0d C[%0d][%0d] = %h, expected %h", s, it, r, c,
                       c_data[s][l*AW +: AW], ref_v));
    end
    // rate: within one iteration (first half, C always ready) one word per clock
    if (co[s] % (CSUB * CWPS) == 0) c_first[s] = cyc;
    if (co[s] % (CSUB * CWPS) == CSUB * CWPS - 1 && it < NIT / 2) begin
      checks++;
      if (cyc - c_first[s] > 2 * (CSUB * CWPS - 1))
        fail($sformatf("iteration %0d C took %0d clocks", it, cyc - c_first[s]));
    end
    co[s]++;
  endtask

  initial begin
    for (int k = 0; k < CL; k++) begin a_valid[k] = 0; a_data[k] = '0; ai[k] = 0; end
    for (int p = 0; p < CL; p++) begin b_valid[p] = 0; b_data[p] = '0; bi[p] = 0; end
    for (int s = 0; s < SP; s++) begin c_ready[s] = 0; co[s] = 0; c_first[s] = 0; end
    foreach (am[i, k, r, c]) am[i][k][r][c] = DW'($urandom);
    foreach (bm[i, s, k, r, c]) bm[i][s][k][r][c] = DW'($urandom);
    for (int it = 0; it < NIT; it++) begin
      for (int k = 0; k < CL; k++)
        for (int u = 0; u < AWPT; u++)
          for (int e = 0; e < WL; e++)
            aimg[k][it*AWPT+u][e*DW +: DW] = am[it][k][el_r(u, e, DK)][el_c(u, e, DK)];
      for (int k = 0; k < CL; k++)
        for (int u = 0; u < BWPT; u++)
          for (int e = 0; e < WL; e++)
            bimg[k][it*BWPT+u][e*DW +: DW] = bm[it][0][k][el_r(u, e, DB)][el_c(u, e, DB)];
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (co[0] >= (NIT / 2) * CSUB * CWPS);
    half = 1;
    wait (co[0] == NIT * CSUB * CWPS);
    repeat (10) @(posedge clk);
    for (int s = 0; s < SP; s++) begin
      checks++;
      if (iter_cnt[s] != NIT) fail($sformatf("iter_cnt[%0d] = %0d", s, iter_cnt[s]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
