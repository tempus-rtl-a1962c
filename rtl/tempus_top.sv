// tempus_top: resource-invariant GEMM streaming engine, C = A x B with A of
// GEMM_A x GEMM_AB and B of GEMM_AB x GEMM_B elements.
//
// A fixed block of SPLIT x CASC_LN multiply kernels (aie_array) is fed from
// external memory by a light programmable-logic data path:
//   plio_tiler  rearranges A and B into tiled, replicated PLIO stream images
//               and afterwards turns the C stream image back into a
//               row-major matrix;
//   dma_hls     streams the images into the kernels over CASC_LN A streams
//               and SPLIT*B_PORTS B streams, and collects the SPLIT C streams,
//               all concurrently, through 16-deep FIFOs.
// The matrix size only changes how many graph iterations run
// (ITERS = GEMM_A*GEMM_B / (DIM*DIM*SPLIT)), never the hardware.
//
// A start pulse runs four phases in order: PH_TILE_A, PH_TILE_B, PH_COMPUTE
// (DMA plus graph iterations), PH_DETILE; then done pulses and the engine
// returns to idle. compute_cycles holds the length of the last PH_COMPUTE.
// The base addresses (128-bit word addresses) of the six memory regions are
// inputs: row-major sources a_src/b_src, the stream images a_img, b_img,
// c_img and the row-major result c_dst (ACC_W-bit elements).
//
// Memory: five simplified AXI4 masters, tl_* (tiler read and write), da_*
// and db_* (DMA reads of the A and B images) and dc_* (DMA write of the C
// image). External memory, the network-on-chip and the host that loads the
// matrices and pulses start are outside this module.
//
// Defaults are the main configuration evaluated for this architecture:
// 1024^3 INT16, DIM 64, SPLIT 2 x CASC_LN 8 = 16 kernels, one PLIO per
// kernel for B (8 + 16 + 2 = 26 PLIO streams). DIM_AB, the reduction slice
// per kernel, is GEMM_AB/CASC_LN so that one graph iteration covers the
// whole reduction dimension.
module tempus_top #(
  parameter int unsigned GEMM_A      = 1024,
  parameter int unsigned GEMM_AB     = 1024,
  parameter int unsigned GEMM_B      = 1024,
  parameter int unsigned DIM         = 64,
  parameter int unsigned SPLIT       = 2,
  parameter int unsigned CASC_LN     = 8,
  parameter int unsigned B_PORTS     = CASC_LN,
  parameter int unsigned DATA_W      = 16,
  parameter int unsigned ACC_W       = 2 * DATA_W,
  parameter int unsigned FIFO_DEPTH  = 16,
  parameter int unsigned BURST       = 32,
  parameter int unsigned OUTSTANDING = 32,
  parameter int unsigned ADDR_W      = 32,
  localparam int unsigned PW         = tempus_pkg::PLIO_W,
  localparam int unsigned NB         = SPLIT * B_PORTS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] a_src,
  input  logic [ADDR_W-1:0] b_src,
  input  logic [ADDR_W-1:0] a_img,
  input  logic [ADDR_W-1:0] b_img,
  input  logic [ADDR_W-1:0] c_img,
  input  logic [ADDR_W-1:0] c_dst,
  output logic              busy,
  output logic              done,
  output tempus_pkg::phase_e phase,
  output logic              pkt_err,
  output logic [31:0]       iter_cnt [SPLIT],
  output logic [31:0]       compute_cycles,
  // tiler read / write
  output logic              tl_arvalid,
  input  logic              tl_arready,
  output logic [ADDR_W-1:0] tl_araddr,
  output logic [7:0]        tl_arlen,
  input  logic              tl_rvalid,
  output logic              tl_rready,
  input  logic [PW-1:0]     tl_rdata,
  input  logic              tl_rlast,
  output logic              tl_awvalid,
  input  logic              tl_awready,
  output logic [ADDR_W-1:0] tl_awaddr,
  output logic [7:0]        tl_awlen,
  output logic              tl_wvalid,
  input  logic              tl_wready,
  output logic [PW-1:0]     tl_wdata,
  output logic              tl_wlast,
  input  logic              tl_bvalid,
  output logic              tl_bready,
  // DMA read of the A image
  output logic              da_arvalid,
  input  logic              da_arready,
  output logic [ADDR_W-1:0] da_araddr,
  output logic [7:0]        da_arlen,
  input  logic              da_rvalid,
  output logic              da_rready,
  input  logic [PW-1:0]     da_rdata,
  input  logic              da_rlast,
  // DMA read of the B image
  output logic              db_arvalid,
  input  logic              db_arready,
  output logic [ADDR_W-1:0] db_araddr,
  output logic [7:0]        db_arlen,
  input  logic              db_rvalid,
  output logic              db_rready,
  input  logic [PW-1:0]     db_rdata,
  input  logic              db_rlast,
  // DMA write of the C image
  output logic              dc_awvalid,
  input  logic              dc_awready,
  output logic [ADDR_W-1:0] dc_awaddr,
  output logic [7:0]        dc_awlen,
  output logic              dc_wvalid,
  input  logic              dc_wready,
  output logic [PW-1:0]     dc_wdata,
  output logic              dc_wlast,
  input  logic              dc_bvalid,
  output logic              dc_bready
);
  import tempus_pkg::*;

  localparam int unsigned DIM_AB = GEMM_AB / CASC_LN;
  localparam int unsigned WRD_LN = PW / DATA_W;
  localparam int unsigned EPW_C  = PW / ACC_W;
  localparam int unsigned ITERS  = (GEMM_A * GEMM_B) / (DIM * DIM * SPLIT);
  localparam int unsigned ND     = CASC_LN / B_PORTS;
  localparam int unsigned A_WORDS = CASC_LN * ITERS * (DIM * DIM_AB / WRD_LN);
  localparam int unsigned B_WORDS = NB * ITERS * ND * (1 + DIM_AB * DIM / WRD_LN);
  localparam int unsigned C_WORDS = SPLIT * ITERS * (DIM * DIM / EPW_C);

  // ------------------------------------------------------------ sequencer
  logic     tl_start, tl_busy, tl_done, dma_start, dma_busy, dma_done;
  tl_mode_e tl_mode;
  logic [ADDR_W-1:0] tl_src, tl_dst;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE; tl_start <= 1'b0; dma_start <= 1'b0; done <= 1'b0;
      compute_cycles <= '0;
    end else begin
      tl_start <= 1'b0; dma_start <= 1'b0; done <= 1'b0;
      case (phase)
        PH_IDLE:   if (start) begin phase <= PH_TILE_A; tl_start <= 1'b1; end
        PH_TILE_A: if (tl_done) begin phase <= PH_TILE_B; tl_start <= 1'b1; end
        PH_TILE_B: if (tl_done) begin
                     phase <= PH_COMPUTE; dma_start <= 1'b1; compute_cycles <= '0;
                   end
        PH_COMPUTE: begin
                     compute_cycles <= compute_cycles + 1;
                     if (dma_done) begin phase <= PH_DETILE; tl_start <= 1'b1; end
                   end
        PH_DETILE: if (tl_done) begin phase <= PH_DONE; done <= 1'b1; end
        default:   phase <= PH_IDLE;
      endcase
    end
  end

  // the tiler pass is chosen by the phase it runs in (start is registered,
  // so the phase has already advanced when the tiler samples it)
  always_comb begin
    unique case (phase)
      PH_TILE_A: begin tl_mode = TL_A;      tl_src = a_src; tl_dst = a_img; end
      PH_TILE_B: begin tl_mode = TL_B;      tl_src = b_src; tl_dst = b_img; end
      default:   begin tl_mode = TL_DETILE; tl_src = c_img; tl_dst = c_dst; end
    endcase
  end

  assign busy = (phase != PH_IDLE) && (phase != PH_DONE);

  // ------------------------------------------------------------ tiler
  plio_tiler #(
    .GEMM_A(GEMM_A), .GEMM_AB(GEMM_AB), .GEMM_B(GEMM_B),
    .DIM_A(DIM), .DIM_AB(DIM_AB), .DIM_B(DIM),
    .SPLIT(SPLIT), .CASC_LN(CASC_LN), .B_PORTS(B_PORTS),
    .DATA_W(DATA_W), .ACC_W(ACC_W), .ADDR_W(ADDR_W)
  ) u_tiler (
    .clk, .rst_n, .start(tl_start), .mode(tl_mode),
    .src_base(tl_src), .dst_base(tl_dst), .busy(tl_busy), .done(tl_done),
    .arvalid(tl_arvalid), .arready(tl_arready), .araddr(tl_araddr), .arlen(tl_arlen),
    .rvalid(tl_rvalid), .rready(tl_rready), .rdata(tl_rdata), .rlast(tl_rlast),
    .awvalid(tl_awvalid), .awready(tl_awready), .awaddr(tl_awaddr), .awlen(tl_awlen),
    .wvalid(tl_wvalid), .wready(tl_wready), .wdata(tl_wdata), .wlast(tl_wlast),
    .bvalid(tl_bvalid), .bready(tl_bready)
  );

  // ------------------------------------------------------------ DMA
  logic          sa_valid [CASC_LN];
  logic          sa_ready [CASC_LN];
  logic [PW-1:0] sa_data  [CASC_LN];
  logic          sb_valid [NB];
  logic          sb_ready [NB];
  logic [PW-1:0] sb_data  [NB];
  logic          sc_valid [SPLIT];
  logic          sc_ready [SPLIT];
  logic [PW-1:0] sc_data  [SPLIT];

  dma_hls #(
    .NUM_A(CASC_LN), .NUM_B(NB), .SPLIT(SPLIT), .ADDR_W(ADDR_W),
    .FIFO_DEPTH(FIFO_DEPTH), .BURST(BURST), .OUTSTANDING(OUTSTANDING)
  ) u_dma (
    .clk, .rst_n, .start(dma_start),
    .a_base(a_img), .b_base(b_img), .c_base(c_img),
    .a_words(A_WORDS), .b_words(B_WORDS), .c_words(C_WORDS),
    .busy(dma_busy), .done(dma_done),
    .a_arvalid(da_arvalid), .a_arready(da_arready), .a_araddr(da_araddr), .a_arlen(da_arlen),
    .a_rvalid(da_rvalid), .a_rready(da_rready), .a_rdata(da_rdata), .a_rlast(da_rlast),
    .b_arvalid(db_arvalid), .b_arready(db_arready), .b_araddr(db_araddr), .b_arlen(db_arlen),
    .b_rvalid(db_rvalid), .b_rready(db_rready), .b_rdata(db_rdata), .b_rlast(db_rlast),
    .c_awvalid(dc_awvalid), .c_awready(dc_awready), .c_awaddr(dc_awaddr), .c_awlen(dc_awlen),
    .c_wvalid(dc_wvalid), .c_wready(dc_wready), .c_wdata(dc_wdata), .c_wlast(dc_wlast),
    .c_bvalid(dc_bvalid), .c_bready(dc_bready),
    .sa_valid, .sa_ready, .sa_data,
    .sb_valid, .sb_ready, .sb_data,
    .sc_valid, .sc_ready, .sc_data
  );

  // ------------------------------------------------------------ compute block
  aie_array #(
    .SPLIT(SPLIT), .CASC_LN(CASC_LN), .B_PORTS(B_PORTS),
    .DATA_W(DATA_W), .ACC_W(ACC_W),
    .DIM_A(DIM), .DIM_AB(DIM_AB), .DIM_B(DIM)
  ) u_array (
    .clk, .rst_n,
    .a_valid(sa_valid), .a_ready(sa_ready), .a_data(sa_data),
    .b_valid(sb_valid), .b_ready(sb_ready), .b_data(sb_data),
    .c_valid(sc_valid), .c_ready(sc_ready), .c_data(sc_data),
    .pkt_err, .iter_cnt
  );

  // the data path never starts a pass while the previous one still runs
  no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    !(tl_busy && dma_busy));
endmodule
