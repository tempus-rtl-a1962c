// mmult_graph: one split of the compute block, a cascade chain of CASC_LN
// matrix-multiply kernels.
//
// Kernel k of the chain receives A and B tiles for the k-th slice of the
// reduction (GEMM_SIZE_AB) dimension, so each graph iteration the chain as a
// whole reduces DIM_A x (CASC_LN*DIM_AB) by (CASC_LN*DIM_AB) x DIM_B. Partial
// sums flow kernel 0 -> kernel CASC_LN-1 over the cascade bus, one 4x4 C
// subtile per cascade word; the first kernel starts from zero. The last
// kernel's output is cut into PLIO words (CW/128 words per subtile, row 0 of
// the subtile first) and leaves on the split's C stream (matC_out[i]).
//
// Interface: a_* and b_* are arrays of CASC_LN valid/ready PLIO streams,
// c_* one valid/ready PLIO stream. iter_cnt counts finished graph iterations
// (tile products completed by the last kernel) since reset.
//
// Follows the paper: the chain structure, CASC_LN kernels per split,
// cascade reduction over the shared dimension, one output stream per split.
// Own choice: the width conversion from cascade words to PLIO words.
module mmult_graph #(
  parameter int unsigned CASC_LN = 8,
  parameter int unsigned DATA_W  = 16,
  parameter int unsigned ACC_W   = 2 * DATA_W,
  parameter int unsigned DIM_A   = 64,
  parameter int unsigned DIM_AB  = 128,
  parameter int unsigned DIM_B   = 64,
  localparam int unsigned PW     = tempus_pkg::PLIO_W,
  localparam int unsigned CW     = tempus_pkg::SUB_EL * ACC_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          a_valid [CASC_LN],
  output logic          a_ready [CASC_LN],
  input  logic [PW-1:0] a_data  [CASC_LN],
  input  logic          b_valid [CASC_LN],
  output logic          b_ready [CASC_LN],
  input  logic [PW-1:0] b_data  [CASC_LN],
  output logic          c_valid,
  input  logic          c_ready,
  output logic [PW-1:0] c_data,
  output logic [31:0]   iter_cnt
);
  localparam int unsigned NW = CW / PW;  // PLIO words per C subtile

  logic          cv [CASC_LN+1];
  logic          cr [CASC_LN+1];
  logic [CW-1:0] cd [CASC_LN+1];
  logic          done [CASC_LN];

  assign cv[0] = 1'b0;
  assign cd[0] = '0;

  for (genvar k = 0; k < CASC_LN; k++) begin : g_kernel
    mmult_core #(
      .DATA_W (DATA_W), .ACC_W (ACC_W),
      .DIM_A  (DIM_A),  .DIM_AB(DIM_AB), .DIM_B(DIM_B),
      .HAS_CIN(k != 0)
    ) u_core (
      .clk, .rst_n,
      .a_valid(a_valid[k]), .a_ready(a_ready[k]), .a_data(a_data[k]),
      .b_valid(b_valid[k]), .b_ready(b_ready[k]), .b_data(b_data[k]),
      .cin_valid(cv[k]),   .cin_ready(cr[k]),   .cin_data(cd[k]),
      .cout_valid(cv[k+1]), .cout_ready(cr[k+1]), .cout_data(cd[k+1]),
      .iter_done(done[k])
    );
  end

  // ---- cascade word -> PLIO words
  logic [CW-1:0]            sreg;
  logic                     sfull;
  logic [$clog2(NW+1)-1:0]  sidx;

  assign cr[CASC_LN] = !sfull;
  assign c_valid     = sfull;
  assign c_data      = sreg[sidx*PW +: PW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sfull <= 1'b0; sidx <= '0; sreg <= '0; iter_cnt <= '0;
    end else begin
      if (done[CASC_LN-1]) iter_cnt <= iter_cnt + 1;
      if (!sfull && cv[CASC_LN]) begin
        sreg  <= cd[CASC_LN];
        sfull <= 1'b1;
        sidx  <= '0;
      end else if (sfull && c_ready) begin
        if (sidx == $bits(sidx)'(NW - 1)) sfull <= 1'b0;
        else sidx <= sidx + 1'b1;
      end
    end
  end
endmodule
