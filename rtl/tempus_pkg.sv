// tempus_pkg: constants and small helpers shared by the GEMM streaming design.
//
// The design multiplies A (GEMM_SIZE_A x GEMM_SIZE_AB) by B (GEMM_SIZE_AB x
// GEMM_SIZE_B) on a fixed SPLIT x CASC_LN block of matrix-multiply kernels.
// Data moves between the programmable-logic side and the kernels as 128-bit
// PLIO words; kernels pass partial sums over a 512-bit cascade bus.
//
// Fixed by the paper: 128-bit PLIO words, 512-bit cascade, 4x4x4 subtiles,
// row-major elements inside a subtile, WRD_LN = 128 / DATA_W elements per
// PLIO word. This design's own choices: the accumulator (and C element) is
// twice the input width, which makes one 4x4 C subtile exactly one 512-bit
// cascade word for INT16; and the packet header layout below.
package tempus_pkg;

  localparam int unsigned PLIO_W = 128;  // PLIO / AXI4-Stream word width
  localparam int unsigned CASC_W = 512;  // AIE-ML cascade width
  localparam int unsigned SUB    = 4;    // subtile edge (4x4x4 mmul)
  localparam int unsigned SUB_EL = SUB * SUB;

  // Packet header word of the packet-switched B streams: the destination
  // kernel index (within its split) sits in the low bits, a fixed marker in
  // the top byte so a misaligned stream is detected.
  localparam logic [7:0] PKT_MARK = 8'hA5;
  localparam int unsigned PKT_ID_W = 8;

  function automatic logic [PLIO_W-1:0] pkt_header(input logic [PKT_ID_W-1:0] dest);
    logic [PLIO_W-1:0] h;
    h = '0;
    h[PLIO_W-1 -: 8]      = PKT_MARK;
    h[PKT_ID_W-1:0]       = dest;
    return h;
  endfunction

  // Run phases of the top-level sequencer (mirrors the host flow: PL tiling,
  // kernel launch with concurrent graph iterations, result collection).
  typedef enum logic [2:0] {
    PH_IDLE    = 3'd0,
    PH_TILE_A  = 3'd1,
    PH_TILE_B  = 3'd2,
    PH_COMPUTE = 3'd3,
    PH_DETILE  = 3'd4,
    PH_DONE    = 3'd5
  } phase_e;

  // Tiler pass selector.
  typedef enum logic [1:0] {
    TL_A      = 2'd0,
    TL_B      = 2'd1,
    TL_DETILE = 2'd2
  } tl_mode_e;

endpackage
