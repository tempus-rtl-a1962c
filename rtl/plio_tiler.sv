// plio_tiler: tiling, replication and PLIO formatting of the operands, and
// de-tiling of the result.
//
// The compute block only ever sees fixed-size tiles arriving in a fixed
// order, so the matrices have to be rearranged before and after the run.
// This engine does that memory to memory, one pass per start:
//
//  TL_A      row-major A (M x K) -> A stream image. A stream c (c < CASC_LN)
//            carries, for every graph iteration n, the DIM_A x DIM_AB tile of
//            A at row tile blk*RF_B + i and reduction slice c, where
//            n = (blk*RF_A + j)*RF_B + i. The RF_B row tiles of a block are
//            therefore sent once per column tile j: the block is replicated
//            RF_A times. Word w of the image belongs to stream w mod CASC_LN.
//  TL_B      row-major B (K x N) -> B stream image. Port q of split s carries,
//            per iteration, CASC_LN/B_PORTS packets (header + DIM_AB x DIM_B
//            tile at reduction slice c and column tile s*RF_A + j). A column
//            tile is thus repeated for the RF_B row tiles of a block. Word w
//            belongs to B stream w mod (SPLIT*B_PORTS).
//  TL_DETILE C stream image (word w from split w mod SPLIT) -> row-major C
//            (M x N, ACC_W-bit elements).
//
// with RF_A = N/(DIM_B*SPLIT), RF_B = M/(DIM_A*SPLIT) (the replication
// factors) and ITERS = M*N/(DIM_A*DIM_B*SPLIT) graph iterations. Inside a
// tile, subtiles are 4x4 and row-major and their elements row-major; one
// 128-bit word holds WRD_LN = 128/DATA_W elements, i.e. WRD_LN/4 subtile rows.
//
// Pipeline: an address generator walks the output words in order and, for
// each, issues one single-beat read per subtile row it needs (none for a
// packet header), pushing a command per read into a FIFO; a packer pops the
// commands, takes the read data in order, assembles the word and writes it.
// Memory interface: simplified AXI4 read and write channels with 128-bit word
// addresses, single-beat (len 0) transfers.
//
// Control: start with mode, src_base and dst_base; done pulses after the
// last write response of the pass.
//
// Follows the paper: tile orders (A tiles row-major within blocks, B and C
// column-major), replication counts from Eq. 2, WRD_LN per PLIO line, the
// iteration count of Eq. 1, 4x4 row-major subtiles. Own choices: doing the
// rearrangement as separate memory-to-memory passes, the iteration order
// inside a block, the stream interleaving in memory, the packet header.
module plio_tiler #(
  parameter int unsigned GEMM_A  = 1024,
  parameter int unsigned GEMM_AB = 1024,
  parameter int unsigned GEMM_B  = 1024,
  parameter int unsigned DIM_A   = 64,
  parameter int unsigned DIM_AB  = 128,
  parameter int unsigned DIM_B   = 64,
  parameter int unsigned SPLIT   = 2,
  parameter int unsigned CASC_LN = 8,
  parameter int unsigned B_PORTS = CASC_LN,
  parameter int unsigned DATA_W  = 16,
  parameter int unsigned ACC_W   = 2 * DATA_W,
  parameter int unsigned ADDR_W  = 32,
  localparam int unsigned PW     = tempus_pkg::PLIO_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  tempus_pkg::tl_mode_e mode,
  input  logic [ADDR_W-1:0]    src_base,
  input  logic [ADDR_W-1:0]    dst_base,
  output logic                 busy,
  output logic                 done,
  // read master
  output logic                 arvalid,
  input  logic                 arready,
  output logic [ADDR_W-1:0]    araddr,
  output logic [7:0]           arlen,
  input  logic                 rvalid,
  output logic                 rready,
  input  logic [PW-1:0]        rdata,
  input  logic                 rlast,
  // write master
  output logic                 awvalid,
  input  logic                 awready,
  output logic [ADDR_W-1:0]    awaddr,
  output logic [7:0]           awlen,
  output logic                 wvalid,
  input  logic                 wready,
  output logic [PW-1:0]        wdata,
  output logic                 wlast,
  input  logic                 bvalid,
  output logic                 bready
);
  import tempus_pkg::*;

  // ---------------------------------------------------------- geometry
  localparam int unsigned WRD_LN = PW / DATA_W;          // elements per word
  localparam int unsigned CPW    = WRD_LN / SUB;         // subtile rows per word
  localparam int unsigned EPW_C  = PW / ACC_W;           // C elements per word
  localparam int unsigned RF_A   = GEMM_B / (DIM_B * SPLIT);
  localparam int unsigned RF_B   = GEMM_A / (DIM_A * SPLIT);
  localparam int unsigned ITERS  = (GEMM_A * GEMM_B) / (DIM_A * DIM_B * SPLIT);
  localparam int unsigned TA     = DIM_A * DIM_AB / WRD_LN;   // words per A tile
  localparam int unsigned TB     = DIM_AB * DIM_B / WRD_LN;   // words per B tile
  localparam int unsigned TC     = DIM_A * DIM_B / EPW_C;     // words per C tile
  localparam int unsigned NB     = SPLIT * B_PORTS;
  localparam int unsigned ND     = CASC_LN / B_PORTS;
  localparam int unsigned PK     = 1 + TB;                    // packet words
  localparam int unsigned A_WORDS = CASC_LN * ITERS * TA;
  localparam int unsigned B_WORDS = NB * ITERS * ND * PK;
  localparam int unsigned C_WORDS = SPLIT * ITERS * TC;
  localparam int unsigned NCH_MAX = (CPW > 1) ? CPW : 1;
  localparam int unsigned HW      = (NCH_MAX > 1) ? $clog2(NCH_MAX) : 1;

  // row / column tile indices of graph iteration n for split s
  function automatic int unsigned row_tile(input int unsigned n);
    return (n / (RF_B * RF_A)) * RF_B + (n % RF_B);
  endfunction
  function automatic int unsigned col_tile(input int unsigned n, input int unsigned s);
    return s * RF_A + (n / RF_B) % RF_A;
  endfunction

  typedef struct packed {
    logic              hdr;     // packet header word, no read
    logic [7:0]        dest;    // header destination
    logic [HW-1:0]     h;       // chunk (subtile row) index within the word
    logic [1:0]        off;     // chunk position within the read word
    logic              lastc;   // last chunk of the output word
    logic [ADDR_W-1:0] waddr;   // where the output word goes
  } cmd_t;

  // ---------------------------------------------------------- generator
  tl_mode_e          md;
  logic              gen;          // generator active
  logic [31:0]       w, total;
  logic [HW-1:0]     h;
  logic [ADDR_W-1:0] sbase, dbase;
  cmd_t              gcmd;
  logic [ADDR_W-1:0] graddr;
  logic [HW-1:0]     nch_m1;

  always_comb begin
    int unsigned c, t, n, u, g, st, r, sr, sc, row, col, s, q, pk, d, idx;
    gcmd   = '0;
    graddr = '0;
    c = 0; t = 0; n = 0; u = 0; g = 0; st = 0; r = 0; sr = 0; sc = 0;
    row = 0; col = 0; s = 0; q = 0; pk = 0; d = 0; idx = 0;
    nch_m1 = HW'(CPW - 1);
    case (md)
      TL_A: begin
        c = w % CASC_LN;  t = w / CASC_LN;
        n = t / TA;       u = t % TA;
        g = u * WRD_LN + h * SUB;
        st = g / SUB_EL;  r = (g % SUB_EL) / SUB;
        sr = st / (DIM_AB / SUB); sc = st % (DIM_AB / SUB);
        row = row_tile(n) * DIM_A + sr * SUB + r;
        col = c * DIM_AB + sc * SUB;
        idx = row * GEMM_AB + col;
        graddr     = sbase + ADDR_W'(idx / WRD_LN);
        gcmd.off   = 2'((idx % WRD_LN) / SUB);
        gcmd.waddr = dbase + ADDR_W'(w);
      end
      TL_B: begin
        int unsigned cc;
        q  = (w % NB) % B_PORTS;  s = (w % NB) / B_PORTS;  t = w / NB;
        pk = t / PK;  u = t % PK;
        n  = pk / ND; d = pk % ND;
        cc = q * ND + d;
        gcmd.waddr = dbase + ADDR_W'(w);
        if (u == 0) begin
          gcmd.hdr  = 1'b1;
          gcmd.dest = 8'(d);
        end else begin
          g = (u - 1) * WRD_LN + h * SUB;
          st = g / SUB_EL;  r = (g % SUB_EL) / SUB;
          sr = st / (DIM_B / SUB); sc = st % (DIM_B / SUB);
          row = cc * DIM_AB + sr * SUB + r;
          col = col_tile(n, s) * DIM_B + sc * SUB;
          idx = row * GEMM_B + col;
          graddr   = sbase + ADDR_W'(idx / WRD_LN);
          gcmd.off = 2'((idx % WRD_LN) / SUB);
        end
      end
      default: begin  // TL_DETILE: one read per word, whole word
        nch_m1 = '0;
        s = w % SPLIT;  t = w / SPLIT;
        n = t / TC;     u = t % TC;
        g = u * EPW_C;
        st = g / SUB_EL;  r = (g % SUB_EL) / SUB;
        sr = st / (DIM_B / SUB); sc = st % (DIM_B / SUB);
        row = row_tile(n) * DIM_A + sr * SUB + r;
        col = col_tile(n, s) * DIM_B + sc * SUB + (g % SUB);
        idx = row * GEMM_B + col;
        graddr     = sbase + ADDR_W'(w);
        gcmd.waddr = dbase + ADDR_W'(idx / EPW_C);
      end
    endcase
    gcmd.h     = h;
    gcmd.lastc = gcmd.hdr || (h == nch_m1);
  end

  // command FIFO: one entry per read (or header), bounds outstanding reads
  localparam int unsigned QD = 16;
  cmd_t               q_mem [QD];
  logic [$clog2(QD)-1:0] q_wp, q_rp;
  logic [$clog2(QD):0]   q_cnt;
  logic               q_push, q_pop, q_full;
  cmd_t               qh;

  assign q_full  = (q_cnt == ($clog2(QD)+1)'(QD));
  assign qh      = q_mem[q_rp];
  assign arvalid = gen && !q_full && !gcmd.hdr;
  assign araddr  = graddr;
  assign arlen   = 8'd0;
  assign q_push  = gen && !q_full && (gcmd.hdr || arready);

  always_ff @(posedge clk) if (q_push) q_mem[q_wp] <= gcmd;

  // ---------------------------------------------------------- packer
  logic [PW-1:0] asm_q;       // word being assembled
  logic          ov;          // output word pending (AW and/or W not done)
  logic          aw_done, w_done;
  logic [PW-1:0] odata;
  logic [ADDR_W-1:0] oaddr;
  logic [PW-1:0] nword;
  logic          pk_fire;     // packer consumes the FIFO head
  logic [31:0]   wr_issued, wr_acked, wr_total;

  always_comb begin
    nword = asm_q;
    if (qh.hdr) nword = pkt_header(qh.dest);
    else if (md == TL_DETILE) nword = rdata;
    else nword[qh.h*SUB*DATA_W +: SUB*DATA_W] = rdata[qh.off*SUB*DATA_W +: SUB*DATA_W];
  end

  // the head may be consumed when its data is there and, if it completes a
  // word, the output register is free
  assign pk_fire = (q_cnt != '0) && (qh.hdr || rvalid) && (!qh.lastc || !ov);
  assign rready  = (q_cnt != '0) && !qh.hdr && (!qh.lastc || !ov);
  assign q_pop   = pk_fire;

  assign awvalid = ov && !aw_done;
  assign awaddr  = oaddr;
  assign awlen   = 8'd0;
  assign wvalid  = ov && !w_done;
  assign wdata   = odata;
  assign wlast   = 1'b1;
  assign bready  = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      md <= TL_A; gen <= 1'b0; w <= '0; h <= '0; total <= '0;
      sbase <= '0; dbase <= '0;
      q_wp <= '0; q_rp <= '0; q_cnt <= '0;
      asm_q <= '0; ov <= 1'b0; aw_done <= 1'b0; w_done <= 1'b0;
      odata <= '0; oaddr <= '0;
      wr_issued <= '0; wr_acked <= '0; wr_total <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        md    <= mode;
        sbase <= src_base;
        dbase <= dst_base;
        w <= '0; h <= '0;
        total <= (mode == TL_A) ? A_WORDS : (mode == TL_B) ? B_WORDS : C_WORDS;
        wr_total <= (mode == TL_A) ? A_WORDS : (mode == TL_B) ? B_WORDS : C_WORDS;
        wr_issued <= '0; wr_acked <= '0;
        gen  <= 1'b1;
        busy <= 1'b1;
      end else begin
        // generator walk
        if (q_push) begin
          if (gcmd.lastc) begin
            h <= '0;
            if (w == total - 1) gen <= 1'b0;
            w <= w + 1;
          end else h <= h + 1'b1;
        end
        q_cnt <= q_cnt + ($clog2(QD)+1)'(q_push) - ($clog2(QD)+1)'(q_pop);
        if (q_push) q_wp <= q_wp + 1'b1;
        if (q_pop)  q_rp <= q_rp + 1'b1;
        // packer
        if (pk_fire) begin
          asm_q <= nword;
          if (qh.lastc) begin
            ov <= 1'b1; aw_done <= 1'b0; w_done <= 1'b0;
            odata <= nword; oaddr <= qh.waddr;
          end
        end
        // write channel
        if (ov) begin
          if ((aw_done || (awvalid && awready)) && (w_done || (wvalid && wready))) begin
            ov <= 1'b0;
            wr_issued <= wr_issued + 1;
          end else begin
            if (awvalid && awready) aw_done <= 1'b1;
            if (wvalid && wready)   w_done  <= 1'b1;
          end
        end
        if (bvalid) begin
          wr_acked <= wr_acked + 1;
          if (busy && wr_acked + 1 == wr_total) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  initial assert (GEMM_A % (DIM_A * SPLIT) == 0 && GEMM_B % (DIM_B * SPLIT) == 0 &&
                  GEMM_AB == DIM_AB * CASC_LN && CASC_LN % B_PORTS == 0 &&
                  CPW <= 4 && EPW_C <= SUB)
    else $error("plio_tiler: matrix sizes must be whole multiples of the tiles");

  single_beat: assert property (@(posedge clk) disable iff (!rst_n)
    rvalid && rready |-> rlast);
endmodule
