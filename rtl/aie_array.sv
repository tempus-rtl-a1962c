// aie_array: the fixed SPLIT x CASC_LN compute block.
//
// SPLIT cascade chains (mmult_graph) of CASC_LN kernels each. The size of
// this block never changes with the matrix size: larger products are run as
// more graph iterations, not as more kernels.
//
// Operand routing:
//  * A: CASC_LN input streams (matA_inp[k]). Stream k is broadcast to kernel
//    k of every split (axis_bcast), since all splits work on the same rows
//    of A during an iteration.
//  * B: SPLIT*B_PORTS input streams. Port q of split s feeds a packet switch
//    (pkt_switch) whose NDEST = CASC_LN/B_PORTS outputs go to kernels
//    q*NDEST .. q*NDEST+NDEST-1 of split s. Each B tile is one packet.
//    B_PORTS = CASC_LN gives one PLIO per kernel (the channel count of the
//    main configuration, 8 + 16 + 2 = 26 PLIOs); B_PORTS = 1 gives the
//    fully time-multiplexed form drawn for a 2x2 block.
//  * C: one output stream per split (matC_out[i]).
//
// Interface: arrays of valid/ready PLIO streams; pkt_err flags a malformed
// B packet; iter_cnt reports graph iterations finished by each split.
//
// Follows the paper: the SPLIT x CASC_LN arrangement, A broadcast, B packet
// switching, cascade reduction, one C stream per split. Own choices: the
// B_PORTS parameter, and the packet format (see pkt_switch).
module aie_array #(
  parameter int unsigned SPLIT   = 2,
  parameter int unsigned CASC_LN = 8,
  parameter int unsigned B_PORTS = CASC_LN,
  parameter int unsigned DATA_W  = 16,
  parameter int unsigned ACC_W   = 2 * DATA_W,
  parameter int unsigned DIM_A   = 64,
  parameter int unsigned DIM_AB  = 128,
  parameter int unsigned DIM_B   = 64,
  localparam int unsigned PW     = tempus_pkg::PLIO_W,
  localparam int unsigned NB     = SPLIT * B_PORTS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          a_valid [CASC_LN],
  output logic          a_ready [CASC_LN],
  input  logic [PW-1:0] a_data  [CASC_LN],
  input  logic          b_valid [NB],
  output logic          b_ready [NB],
  input  logic [PW-1:0] b_data  [NB],
  output logic          c_valid [SPLIT],
  input  logic          c_ready [SPLIT],
  output logic [PW-1:0] c_data  [SPLIT],
  output logic          pkt_err,
  output logic [31:0]   iter_cnt [SPLIT]
);
  localparam int unsigned WRD_LN    = PW / DATA_W;
  localparam int unsigned NDEST     = CASC_LN / B_PORTS;
  localparam int unsigned PKT_WORDS = DIM_AB * DIM_B / WRD_LN;

  // kernel-side operand streams, [split][cascade position]
  logic          ka_valid [SPLIT][CASC_LN];
  logic          ka_ready [SPLIT][CASC_LN];
  logic [PW-1:0] ka_data  [CASC_LN];
  logic          kb_valid [SPLIT][CASC_LN];
  logic          kb_ready [SPLIT][CASC_LN];
  logic [PW-1:0] kb_data  [SPLIT][CASC_LN];
  logic          err_v    [NB];

  // A: broadcast circuit switching
  for (genvar k = 0; k < CASC_LN; k++) begin : g_a
    logic ov [SPLIT];
    logic orr [SPLIT];
    axis_bcast #(.N(SPLIT), .W(PW)) u_bcast (
      .clk, .rst_n,
      .in_valid(a_valid[k]), .in_ready(a_ready[k]), .in_data(a_data[k]),
      .out_valid(ov), .out_ready(orr), .out_data(ka_data[k])
    );
    for (genvar s = 0; s < SPLIT; s++) begin : g_s
      assign ka_valid[s][k] = ov[s];
      assign orr[s]         = ka_ready[s][k];
    end
  end

  // B: packet switching
  for (genvar s = 0; s < SPLIT; s++) begin : g_bs
    for (genvar q = 0; q < B_PORTS; q++) begin : g_bq
      logic          ov [NDEST];
      logic          orr [NDEST];
      logic [PW-1:0] od;
      pkt_switch #(.NDEST(NDEST), .PKT_WORDS(PKT_WORDS)) u_psw (
        .clk, .rst_n,
        .in_valid(b_valid[s*B_PORTS+q]), .in_ready(b_ready[s*B_PORTS+q]),
        .in_data(b_data[s*B_PORTS+q]),
        .out_valid(ov), .out_ready(orr), .out_data(od),
        .err(err_v[s*B_PORTS+q])
      );
      for (genvar d = 0; d < NDEST; d++) begin : g_d
        assign kb_valid[s][q*NDEST+d] = ov[d];
        assign kb_data[s][q*NDEST+d]  = od;
        assign orr[d]                 = kb_ready[s][q*NDEST+d];
      end
    end
  end

  always_comb begin
    pkt_err = 1'b0;
    for (int i = 0; i < NB; i++) pkt_err |= err_v[i];
  end

  // SPLIT cascade chains
  for (genvar s = 0; s < SPLIT; s++) begin : g_split
    mmult_graph #(
      .CASC_LN(CASC_LN), .DATA_W(DATA_W), .ACC_W(ACC_W),
      .DIM_A(DIM_A), .DIM_AB(DIM_AB), .DIM_B(DIM_B)
    ) u_graph (
      .clk, .rst_n,
      .a_valid(ka_valid[s]), .a_ready(ka_ready[s]), .a_data(ka_data),
      .b_valid(kb_valid[s]), .b_ready(kb_ready[s]), .b_data(kb_data[s]),
      .c_valid(c_valid[s]), .c_ready(c_ready[s]), .c_data(c_data[s]),
      .iter_cnt(iter_cnt[s])
    );
  end

  initial assert (CASC_LN % B_PORTS == 0)
    else $error("aie_array: CASC_LN must be a multiple of B_PORTS");
endmodule
