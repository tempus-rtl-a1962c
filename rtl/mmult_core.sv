// mmult_core: one matrix-multiply kernel of the fixed compute block.
//
// Each graph iteration the kernel receives one A tile (DIM_A x DIM_AB) and
// one B tile (DIM_AB x DIM_B) as streams of 128-bit PLIO words, multiplies
// them, adds the partial sums arriving on the cascade input from the
// previous kernel of its chain and sends the result down the cascade output.
// It stands in for the AIE-ML core running the library matrix-multiply
// kernel; the compute is written as a dedicated datapath.
//
// Data layout (as in the paper): elements are row-major inside a 4x4
// subtile and subtiles are row-major inside a tile, so a tile arrives as a
// sequence of subtiles, each WPS words long (WPS = 2 for INT16).
//
// Operation: the A and B tile memories are double-buffered (ping/pong), so
// the next iteration's tiles stream in while the current ones are being
// multiplied. The datapath is one 4x4x4 subtile multiply per clock (64 MACs),
// looping k innermost: a 4x4 C subtile takes DIM_AB/4 clocks, and C subtiles
// leave in row-major order. One C subtile is one cascade word: 16 lanes of
// ACC_W bits, lane r*4+c holding C[r][c] (512 bits for INT16). A cascade
// word is consumed and produced once per C subtile with no gap between
// subtiles while the cascade neighbours keep up.
//
// Interfaces: a_*/b_* valid/ready PLIO streams; cin_* cascade input (ignored
// and treated as zero when HAS_CIN = 0, the first kernel of a chain);
// cout_* cascade output. Handshakes transfer on valid && ready.
//
// Timing: one issue per clock; the synchronous tile-memory read adds one
// clock, so a C subtile leaves one clock after its last k step.
//
// This design's own choices (the paper gives only the kernel's function):
// the ping/pong tile buffers, the one-subtile-per-clock datapath and a
// modular (wrap-around) ACC_W-bit accumulator with no output shift.
module mmult_core #(
  parameter int unsigned DATA_W  = 16,
  parameter int unsigned ACC_W   = 2 * DATA_W,
  parameter int unsigned DIM_A   = 64,
  parameter int unsigned DIM_AB  = 128,
  parameter int unsigned DIM_B   = 64,
  parameter bit          HAS_CIN = 1'b1,
  localparam int unsigned PW     = tempus_pkg::PLIO_W,
  localparam int unsigned CW     = tempus_pkg::SUB_EL * ACC_W
) (
  input  logic          clk,
  input  logic          rst_n,
  // A tile stream
  input  logic          a_valid,
  output logic          a_ready,
  input  logic [PW-1:0] a_data,
  // B tile stream
  input  logic          b_valid,
  output logic          b_ready,
  input  logic [PW-1:0] b_data,
  // cascade in (partial sums from the previous kernel)
  input  logic          cin_valid,
  output logic          cin_ready,
  input  logic [CW-1:0] cin_data,
  // cascade out
  output logic          cout_valid,
  input  logic          cout_ready,
  output logic [CW-1:0] cout_data,
  // one pulse per finished tile product (per graph iteration)
  output logic          iter_done
);
  import tempus_pkg::*;

  localparam int unsigned WRD_LN = PW / DATA_W;        // elements per PLIO word
  localparam int unsigned WPS    = SUB_EL / WRD_LN;    // PLIO words per subtile
  localparam int unsigned SA_R   = DIM_A / SUB;        // subtile rows of A / C
  localparam int unsigned SA_C   = DIM_AB / SUB;       // subtile cols of A = k steps
  localparam int unsigned SB_C   = DIM_B / SUB;        // subtile cols of B / C
  localparam int unsigned NSA    = SA_R * SA_C;
  localparam int unsigned NSB    = SA_C * SB_C;
  localparam int unsigned WA     = NSA * WPS;          // PLIO words per A tile
  localparam int unsigned WB     = NSB * WPS;
  localparam int unsigned AW_A   = $clog2(WA);
  localparam int unsigned AW_B   = $clog2(WB);
  localparam int unsigned SW_A   = $clog2(NSA);
  localparam int unsigned SW_B   = $clog2(NSB);
  localparam int unsigned CIW    = (SA_R > 1) ? $clog2(SA_R) : 1;
  localparam int unsigned CJW    = (SB_C > 1) ? $clog2(SB_C) : 1;
  localparam int unsigned KW     = (SA_C > 1) ? $clog2(SA_C) : 1;

  // ---------------------------------------------------------------- buffers
  // Stored per word-lane so one subtile (WPS words) is read in one clock.
  logic [PW-1:0] a_mem [2][WPS][NSA];
  logic [PW-1:0] b_mem [2][WPS][NSB];

  logic [1:0]      a_full, b_full;
  logic            a_wbank, b_wbank, cbank;
  logic [AW_A-1:0] a_wcnt;
  logic [AW_B-1:0] b_wcnt;

  assign a_ready = !a_full[a_wbank];
  assign b_ready = !b_full[b_wbank];

  logic rel;  // compute releases bank cbank (last read of the tile issued)

  always_ff @(posedge clk) begin
    if (a_valid && a_ready)
      a_mem[a_wbank][32'(a_wcnt) % WPS][32'(a_wcnt) / WPS] <= a_data;
    if (b_valid && b_ready)
      b_mem[b_wbank][32'(b_wcnt) % WPS][32'(b_wcnt) / WPS] <= b_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_full <= '0; b_full <= '0;
      a_wbank <= 1'b0; b_wbank <= 1'b0;
      a_wcnt <= '0; b_wcnt <= '0;
    end else begin
      if (a_valid && a_ready) begin
        if (a_wcnt == AW_A'(WA - 1)) begin
          a_wcnt <= '0;
          a_full[a_wbank] <= 1'b1;
          a_wbank <= !a_wbank;
        end else a_wcnt <= a_wcnt + 1'b1;
      end
      if (b_valid && b_ready) begin
        if (b_wcnt == AW_B'(WB - 1)) begin
          b_wcnt <= '0;
          b_full[b_wbank] <= 1'b1;
          b_wbank <= !b_wbank;
        end else b_wcnt <= b_wcnt + 1'b1;
      end
      // a bank being released is never the one completing in this clock:
      // the loader only writes a bank that is not full
      if (rel) begin
        a_full[cbank] <= 1'b0;
        b_full[cbank] <= 1'b0;
      end
    end
  end

  // ---------------------------------------------------------------- compute
  logic [CIW-1:0]          ci;   // C subtile row
  logic [CJW-1:0]          cj;   // C subtile col
  logic [KW-1:0]           kk;   // k step
  logic                    en;   // pipeline advances
  logic                    issue;

  // stage 1 (after synchronous read)
  logic                    v1, first1, last1;
  logic [PW-1:0]           a_q [WPS];
  logic [PW-1:0]           b_q [WPS];
  logic [ACC_W-1:0]        acc  [SUB_EL];
  logic [ACC_W-1:0]        accn [SUB_EL];

  assign issue = en && a_full[cbank] && b_full[cbank];
  assign rel   = issue && (ci == $bits(ci)'(SA_R - 1)) &&
                 (cj == $bits(cj)'(SB_C - 1)) && (kk == $bits(kk)'(SA_C - 1));

  logic [SW_A-1:0] a_sidx;
  logic [SW_B-1:0] b_sidx;
  assign a_sidx = SW_A'(ci * SA_C + kk);
  assign b_sidx = SW_B'(kk * SB_C + cj);

  always_ff @(posedge clk) begin
    if (issue) begin
      for (int w = 0; w < WPS; w++) begin
        a_q[w] <= a_mem[cbank][w][a_sidx];
        b_q[w] <= b_mem[cbank][w][b_sidx];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ci <= '0; cj <= '0; kk <= '0; cbank <= 1'b0;
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0;
    end else if (en) begin
      v1 <= issue;
      if (issue) begin
        first1 <= (kk == '0);
        last1  <= (kk == $bits(kk)'(SA_C - 1));
        if (kk == $bits(kk)'(SA_C - 1)) begin
          kk <= '0;
          if (cj == $bits(cj)'(SB_C - 1)) begin
            cj <= '0;
            if (ci == $bits(ci)'(SA_R - 1)) begin
              ci <= '0;
              cbank <= !cbank;
            end else ci <= ci + 1'b1;
          end else cj <= cj + 1'b1;
        end else kk <= kk + 1'b1;
      end
    end
  end

  // 4x4x4 subtile product added to the running sum
  always_comb begin
    logic signed [DATA_W-1:0] ae, be;
    logic [ACC_W-1:0] s;
    for (int r = 0; r < SUB; r++) begin
      for (int c = 0; c < SUB; c++) begin
        s = first1 ? '0 : acc[r*SUB+c];
        for (int k = 0; k < SUB; k++) begin
          ae = a_q[(r*SUB+k) / WRD_LN][((r*SUB+k) % WRD_LN)*DATA_W +: DATA_W];
          be = b_q[(k*SUB+c) / WRD_LN][((k*SUB+c) % WRD_LN)*DATA_W +: DATA_W];
          s  = s + ACC_W'($signed(ae) * $signed(be));
        end
        accn[r*SUB+c] = s;
      end
    end
  end

  // cascade handshake: the last k step of a subtile needs the partial sum
  // from the previous kernel and room in the output register
  logic out_free, cin_ok;
  assign out_free = !cout_valid || cout_ready;
  assign cin_ok   = !HAS_CIN || cin_valid;
  assign en       = !(v1 && last1 && !(out_free && cin_ok));
  assign cin_ready = HAS_CIN && v1 && last1 && out_free;

  always_ff @(posedge clk) begin
    if (en && v1) begin
      for (int e = 0; e < SUB_EL; e++) acc[e] <= accn[e];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cout_valid <= 1'b0;
      cout_data  <= '0;
      iter_done  <= 1'b0;
    end else begin
      iter_done <= rel;
      if (cout_valid && cout_ready) cout_valid <= 1'b0;
      if (en && v1 && last1) begin
        cout_valid <= 1'b1;
        for (int e = 0; e < SUB_EL; e++)
          cout_data[e*ACC_W +: ACC_W] <= accn[e] +
              (HAS_CIN ? cin_data[e*ACC_W +: ACC_W] : '0);
      end
    end
  end

  // the accumulator lanes must exactly fill the cascade word
  initial assert (SUB_EL % WRD_LN == 0 && DIM_A % SUB == 0 && DIM_AB % SUB == 0 &&
                  DIM_B % SUB == 0)
    else $error("mmult_core: tile dimensions must be multiples of 4");
  // for INT16 one C subtile is exactly one 512-bit cascade word
  initial assert (DATA_W != 16 || ACC_W != 32 || CW == CASC_W)
    else $error("mmult_core: cascade word width mismatch");
  // a valid stream must hold its data until taken
  cout_hold: assert property (@(posedge clk) disable iff (!rst_n)
    cout_valid && !cout_ready |=> cout_valid && $stable(cout_data));
endmodule
