// tb_aie_array: unit test of the fixed compute block (broadcast A, packet-
// switched B, SPLIT cascade chains).
//
// Configuration under test: SPLIT = 2 chains of CASC_LN = 2 kernels with one
// B stream per split (B_PORTS = 1), so each B stream carries packets for two
// kernels and the packet switch has to steer them; tiles are 8x8 INT16.
// For every graph iteration the test sends one random A tile per cascade
// position (the same tile reaches both splits through the broadcast) and one
// random B tile per kernel, as header + body packets. Each split's C stream
// must then carry C_s = sum_k A_k * B_(s,k) as 4x4 subtiles in row-major
// order, 16 lanes of 32 bits per subtile spread over four 128-bit words.
// A and B streams pause at random between words (a word once offered is
// held until taken) and the C outputs stall at random in the
// second half. The test also checks iter_cnt, that pkt_err stays low, and,
// in the first half (no stalls on C), that an iteration's C words leave
// within twice their count in clocks once started.
module tb_aie_array;
  import tempus_pkg::*;
  localparam int SP = 2, CL = 2, BP = 1, ND = CL / BP, NBS = SP * BP;
  localparam int DW = 16, AW = 32, DA = 8, DK = 8, DB = 8, WL = 128 / DW;
  localparam int NIT = 6;
  localparam int AWPT = DA * DK / WL, BWPT = DK * DB / WL;
  localparam int CSUB = (DA / 4) * (DB / 4), CWPS = 16 * AW / 128;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic         a_valid [CL];
  logic         a_ready [CL];
  logic [127:0] a_data  [CL];
  logic         b_valid [NBS];
  logic         b_ready [NBS];
  logic [127:0] b_data  [NBS];
  logic         c_valid [SP];
  logic         c_ready [SP];
  logic [127:0] c_data  [SP];
  logic         pkt_err;
  logic [31:0]  iter_cnt [SP];

  aie_array #(.SPLIT(SP), .CASC_LN(CL), .B_PORTS(BP), .DATA_W(DW),
              .DIM_A(DA), .DIM_AB(DK), .DIM_B(DB)) dut (.*);

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
  logic [127:0] bimg [NBS][NIT*ND*(BWPT+1)];
  int ai [CL];
  int bi [NBS];
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
      for (int p = 0; p < NBS; p++) begin
        int n;
        n = bi[p] + ((b_valid[p] && b_ready[p]) ? 1 : 0);
        bi[p] = n;
        b_valid[p] <= (n < NIT * ND * (BWPT + 1)) && ((b_valid[p] && !b_ready[p]) || $urandom % 5 != 0);
        b_data[p]  <= bimg[p][n < NIT * ND * (BWPT + 1) ? n : 0];
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
    for (int p = 0; p < NBS; p++) begin b_valid[p] = 0; b_data[p] = '0; bi[p] = 0; end
    for (int s = 0; s < SP; s++) begin c_ready[s] = 0; co[s] = 0; c_first[s] = 0; end
    foreach (am[i, k, r, c]) am[i][k][r][c] = DW'($urandom);
    foreach (bm[i, s, k, r, c]) bm[i][s][k][r][c] = DW'($urandom);
    for (int it = 0; it < NIT; it++) begin
      for (int k = 0; k < CL; k++)
        for (int u = 0; u < AWPT; u++)
          for (int e = 0; e < WL; e++)
            aimg[k][it*AWPT+u][e*DW +: DW] = am[it][k][el_r(u, e, DK)][el_c(u, e, DK)];
      for (int s = 0; s < SP; s++)
        for (int q = 0; q < BP; q++)
          for (int d = 0; d < ND; d++) begin
            int base;
            base = (it * ND + d) * (BWPT + 1);
            bimg[s*BP+q][base] = pkt_header(8'(d));
            for (int u = 0; u < BWPT; u++)
              for (int e = 0; e < WL; e++)
                bimg[s*BP+q][base+1+u][e*DW +: DW] =
                  bm[it][s][q*ND+d][el_r(u, e, DB)][el_c(u, e, DB)];
          end
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (co[0] >= (NIT / 2) * CSUB * CWPS);
    half = 1;
    wait (co[0] == NIT * CSUB * CWPS && co[1] == NIT * CSUB * CWPS);
    repeat (10) @(posedge clk);
    for (int s = 0; s < SP; s++) begin
      checks++;
      if (iter_cnt[s] != NIT) fail($sformatf("iter_cnt[%0d] = %0d", s, iter_cnt[s]));
    end
    checks++;
    if (pkt_err) fail("pkt_err raised");
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
