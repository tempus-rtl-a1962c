// tb_mmult_core: unit test of one multiply kernel.
//
// Sends NIT random A (8x16) and B (16x8) INT16 tiles in the subtile order,
// with a random cascade-input partial sum per C subtile, and checks every
// cascade output word against A*B + cin computed here. Phase 1 keeps the
// output always ready and checks the spacing of results: one C subtile
// every DIM_AB/4 clocks (one 4x4x4 step per clock). Phase 2 applies random
// back-pressure and random input gaps and checks the data again.
module tb_mmult_core;
  localparam int DW = 16, AW = 32, DA = 8, DK = 16, DB = 8, WL = 128 / DW;
  localparam int NIT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic a_valid, a_ready, b_valid, b_ready, cin_valid, cin_ready;
  logic cout_valid, cout_ready, iter_done;
  logic [127:0] a_data, b_data;
  logic [16*AW-1:0] cin_data, cout_data;

  mmult_core #(.DATA_W(DW), .DIM_A(DA), .DIM_AB(DK), .DIM_B(DB), .HAS_CIN(1)) dut (.*);

  int checks = 0, failures = 0;
  logic signed [DW-1:0] am [2*NIT][DA][DK];
  logic signed [DW-1:0] bm [2*NIT][DK][DB];
  logic [16*AW-1:0] cq [$];    // cascade inputs in the order sent
  int ph;                        // 0: phase 1, 1: phase 2
  int last_out, gaps_bad, outs;

  // word u of a tile with C columns (subtiles row-major, elements row-major)
  function automatic int el_r(int u, int e, int cols);
    int g = u * WL + e; int st = g / 16;
    return (st / (cols / 4)) * 4 + (g % 16) / 4;
  endfunction
  function automatic int el_c(int u, int e, int cols);
    int g = u * WL + e; int st = g / 16;
    return (st % (cols / 4)) * 4 + g % 4;
  endfunction

  // operand drivers: word arrays filled per phase, sent in order; random
  // input gaps in phase 2
  localparam int AWPI = DA * DK / WL, BWPI = DK * DB / WL;
  logic [127:0] aw [2*NIT*AWPI];
  logic [127:0] bw [2*NIT*BWPI];
  int a_idx, b_idx, a_lim, b_lim;
  always @(posedge clk) begin
    if (!rst_n) begin
      a_idx <= 0; b_idx <= 0; a_valid <= 1'b0; b_valid <= 1'b0;
    end else begin
      int an, bn;
      an = a_idx + ((a_valid && a_ready) ? 1 : 0);
      bn = b_idx + ((b_valid && b_ready) ? 1 : 0);
      a_idx   <= an;
      b_idx   <= bn;
      a_valid <= (an < a_lim) && !(ph == 1 && $urandom % 3 == 0);
      b_valid <= (bn < b_lim) && !(ph == 1 && $urandom % 3 == 0);
      a_data  <= aw[an];
      b_data  <= bw[bn];
    end
  end

  task automatic queue_tiles(int it);
    logic [127:0] wd;
    for (int u = 0; u < DA * DK / WL; u++) begin
      for (int e = 0; e < WL; e++) wd[e*DW +: DW] = am[it][el_r(u, e, DK)][el_c(u, e, DK)];
      aw[it*AWPI+u] = wd;
    end
    for (int u = 0; u < DK * DB / WL; u++) begin
      for (int e = 0; e < WL; e++) wd[e*DW +: DW] = bm[it][el_r(u, e, DB)][el_c(u, e, DB)];
      bw[it*BWPI+u] = wd;
    end
  endtask

  // cascade input source: random partial sums, always available
  always_ff @(posedge clk) begin
    if (!rst_n) cin_valid <= 1'b0;
    else if (!cin_valid || cin_ready) begin
      logic [16*AW-1:0] v;
      for (int i = 0; i < 16; i++) v[i*AW +: AW] = $urandom;
      cin_data  <= v;
      cin_valid <= 1'b1;
    end
  end
  always @(posedge clk) if (cin_valid && cin_ready) cq.push_back(cin_data);

  // output checker
  int oit = 0, osub = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) cout_ready <= (ph == 0) ? 1'b1 : ($urandom % 4 != 0);
    if (cout_valid && cout_ready) begin
      logic [16*AW-1:0] cin;
      int sr, sc;
      sr = osub / (DB / 4);
      sc = osub % (DB / 4);
      cin = cq.pop_front();
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 4; c++) begin
          logic [AW-1:0] ref_v;
          ref_v = cin[(r*4+c)*AW +: AW];
          for (int k = 0; k < DK; k++)
            ref_v += AW'(longint'(am[oit][sr*4+r][k]) * longint'(bm[oit][k][sc*4+c]));
          checks++;
          if (cout_data[(r*4+c)*AW +: AW] !== ref_v) begin
            failures++;
            if (failures < 10) $display("FAIL it %0d sub %0d el %0d: %h vs %h", oit, osub,
                                        r*4+c, cout_data[(r*4+c)*AW +: AW], ref_v);
          end
        end
      // phase 1: consecutive subtiles of one tile leave DK/4 clocks apart
      if (ph == 0 && osub != 0) begin
        checks++;
        if (cyc - last_out != DK / 4) begin
          failures++;
          $display("FAIL spacing %0d clocks, expected %0d", cyc - last_out, DK / 4);
        end
      end
      last_out = cyc;
      outs++;
      if (osub == (DA / 4) * (DB / 4) - 1) begin osub = 0; oit++; end
      else osub++;
    end
  end

  initial begin
    ph = 0; outs = 0; a_lim = 0; b_lim = 0;
    foreach (aw[i]) aw[i] = '0;
    foreach (bw[i]) bw[i] = '0;
    cout_ready = 0;
    for (int it = 0; it < 2 * NIT; it++) begin
      foreach (am[it, r, k]) am[it][r][k] = DW'($urandom);
      foreach (bm[it, k, c]) bm[it][k][c] = DW'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int it = 0; it < NIT; it++) queue_tiles(it);
    a_lim = NIT * AWPI; b_lim = NIT * BWPI;
    wait (oit == NIT);
    ph = 1;
    for (int it = NIT; it < 2 * NIT; it++) queue_tiles(it);
    a_lim = 2 * NIT * AWPI; b_lim = 2 * NIT * BWPI;
    wait (oit == 2 * NIT);
    repeat (5) @(posedge clk);
    checks++;
    if (outs != 2 * NIT * (DA / 4) * (DB / 4)) failures++;
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
